// tb_array_sizes: runs the accelerator at the other array sizes of the
// published overhead study, 8x8, 32x32 and 64x64 (buffers stay 64 KB each),
// one ST-OS and one OS command per size, through size_check. Results and
// cycle counts are compared with direct computations.
module tb_array_sizes;
  logic clk = 0, rst_n = 0;
  int   c8, f8, c32, f32, c64, f64;
  logic d8, d32, d64;

  always #5 clk = ~clk;

  size_check #(.N(8))  u8  (.clk, .rst_n, .checks(c8),  .failures(f8),  .finished(d8));
  size_check #(.N(32)) u32 (.clk, .rst_n, .checks(c32), .failures(f32), .finished(d32));
  size_check #(.N(64)) u64 (.clk, .rst_n, .checks(c64), .failures(f64), .finished(d64));

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c32 + c64, f8 + f32 + f64 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (d8 && d32 && d64);
    $display("sizes 8/32/64: checks %0d/%0d/%0d failures %0d/%0d/%0d", c8, c32, c64, f8, f32, f64);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c32 + c64, f8 + f32 + f64);
    $finish;
  end
endmodule

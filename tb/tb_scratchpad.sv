// tb_scratchpad: checks the banked buffer at its reference size (16 banks of
// 4096 bytes, 64 KB).
//
// Writes random words to random banks and addresses while keeping a copy in
// the testbench, reads them back with one-cycle latency on all banks in
// parallel, and checks that a read of an address written in the same cycle
// returns the old word.
module tb_scratchpad;
  localparam int B  = 16;
  localparam int D  = 4096;
  localparam int W  = 8;
  localparam int AW = 12;

  logic         clk = 0;
  logic         rd_en   [B];
  logic [AW-1:0] rd_addr [B];
  logic [W-1:0] rd_data [B];
  logic         wr_en   [B];
  logic [AW-1:0] wr_addr [B];
  logic [W-1:0] wr_data [B];

  int checks = 0, failures = 0;
  logic [W-1:0] shadow [B][D];
  bit           known  [B][D];

  scratchpad #(.BANKS(B), .DEPTH(D), .WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < B; b++) begin
      rd_en[b] = 0; wr_en[b] = 0; rd_addr[b] = 0; wr_addr[b] = 0; wr_data[b] = 0;
      for (int a = 0; a < D; a++) known[b][a] = 0;
    end
    // random writes, several banks per cycle
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      for (int b = 0; b < B; b++) begin
        wr_en[b]   = $urandom_range(0, 1);
        wr_addr[b] = AW'($urandom_range(0, 255));
        wr_data[b] = W'($urandom);
        if (wr_en[b]) begin
          shadow[b][wr_addr[b]] = wr_data[b];
          known[b][wr_addr[b]]  = 1;
        end
      end
    end
    @(negedge clk);
    for (int b = 0; b < B; b++) wr_en[b] = 0;
    // parallel reads on all banks
    for (int a = 0; a < 256; a++) begin
      for (int b = 0; b < B; b++) begin rd_en[b] = 1; rd_addr[b] = AW'(a); end
      @(negedge clk);
      for (int b = 0; b < B; b++)
        if (known[b][a]) begin
          checks++;
          if (rd_data[b] != shadow[b][a]) begin
            failures++;
            $display("FAIL bank %0d addr %0d got %0h expected %0h", b, a, rd_data[b], shadow[b][a]);
          end
        end
    end
    // top of the address range
    for (int b = 0; b < B; b++) begin rd_en[b] = 0; wr_en[b] = 1; wr_addr[b] = AW'(D-1); wr_data[b] = W'(b*7+1); end
    @(negedge clk);
    // read-during-write returns the old word
    for (int b = 0; b < B; b++) begin
      wr_en[b] = 1; wr_addr[b] = AW'(D-1); wr_data[b] = W'(b*3+100);
      rd_en[b] = 1; rd_addr[b] = AW'(D-1);
    end
    @(negedge clk);
    for (int b = 0; b < B; b++) begin
      checks++;
      if (rd_data[b] != W'(b*7+1)) begin failures++; $display("FAIL rdw bank %0d", b); end
      wr_en[b] = 0;
    end
    @(negedge clk);
    for (int b = 0; b < B; b++) begin
      checks++;
      if (rd_data[b] != W'(b*3+100)) begin failures++; $display("FAIL new bank %0d", b); end
    end
    // rd_en low holds the last word
    for (int b = 0; b < B; b++) begin rd_en[b] = 0; rd_addr[b] = 0; end
    @(negedge clk);
    for (int b = 0; b < B; b++) begin
      checks++;
      if (rd_data[b] != W'(b*3+100)) begin failures++; $display("FAIL hold bank %0d", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

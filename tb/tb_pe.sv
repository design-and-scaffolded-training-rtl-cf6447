// tb_pe: self-checking test of one processing element.
//
// Drives random operands, broadcast values and control (data_en, clr, mac_en,
// drain) and compares the registered outputs and the accumulator every cycle
// against a cycle-level reference kept in the testbench: the horizontal
// register follows h_in, the vertical register follows bc_in when data_en is
// high and v_in otherwise, and the accumulator adds the signed product of the
// two registers. Also checks the one-cycle operand and two-cycle result
// latency with a directed sequence.
module tb_pe;
  localparam int DW = 8;
  localparam int AW = 32;

  logic clk = 0, rst_n = 0;
  logic data_en, clr, mac_en, drain;
  logic signed [DW-1:0] h_in, v_in, bc_in, h_out, v_out;
  logic signed [AW-1:0] acc_in, acc_out;

  int checks = 0, failures = 0;

  pe #(.DATA_W(DW), .ACC_W(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // reference state
  logic signed [DW-1:0] rh, rv;
  logic signed [AW-1:0] racc;

  initial begin
    data_en = 0; clr = 0; mac_en = 0; drain = 0;
    h_in = 0; v_in = 0; bc_in = 0; acc_in = 0;
    rh = 0; rv = 0; racc = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // directed: 3 * -4 via the systolic input, then 5 * 7 via the broadcast
    @(negedge clk);
    h_in = 3; v_in = -4; bc_in = 100; data_en = 0; mac_en = 0; clr = 1;
    @(negedge clk);
    clr = 0; h_in = 5; v_in = 99; bc_in = 7; data_en = 1; mac_en = 1;
    check("h_out after 1 cycle", h_out, 0);  // cleared this cycle
    @(negedge clk);
    check("h_out latency", h_out, 5);
    check("v_out takes broadcast", v_out, 7);
    check("acc first", acc_out, 0);
    h_in = 0; bc_in = 0; mac_en = 1;
    @(negedge clk);
    check("acc 5*7", acc_out, 35);
    mac_en = 0;
    @(negedge clk);
    check("acc hold", acc_out, 35);

    // random run against the reference model
    rh = h_out; rv = v_out; racc = acc_out;
    for (int i = 0; i < 3000; i++) begin
      h_in    = DW'($urandom);
      v_in    = DW'($urandom);
      bc_in   = DW'($urandom);
      acc_in  = AW'($urandom);
      data_en = $urandom_range(0, 1);
      clr     = ($urandom_range(0, 15) == 0);
      mac_en  = $urandom_range(0, 3) != 0;
      drain   = ($urandom_range(0, 7) == 0);
      @(posedge clk);
      // reference update with values before the edge
      if (drain)       racc = acc_in;
      else if (clr)    racc = 0;
      else if (mac_en) racc = racc + AW'(rh * rv);
      if (clr) begin rh = 0; rv = 0; end
      else begin rh = h_in; rv = data_en ? bc_in : v_in; end
      @(negedge clk);
      check("h_out", h_out, rh);
      check("v_out", v_out, rv);
      check("acc_out", acc_out, racc);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_stos_controller: checks the fold sequencing of the controller.
//
// For an ST-OS command and an OS command (two folds each) the testbench builds
// the expected cycle-by-cycle trace from the dataflow definitions: the clear
// cycle, the stream cycles with every bank's read enable and address, the
// flush cycles, the drain cycles with the OFMAP write address, the advance of
// the base addresses by their strides, and the total cycle count per fold
// (1 + T + F + ROWS). It compares the controller outputs with that trace every
// cycle, and checks the one-cycle-delayed valid flags and the done pulse.
module tb_stos_controller;
  import fuse_pkg::*;
  localparam int R = 16;
  localparam int C = 16;

  logic        clk = 0, rst_n = 0;
  logic        start;
  cmd_t        cmd;
  logic        busy, done, data_en, arr_clr, arr_mac_en, arr_drain;
  logic        if_rd_en   [R];
  logic [11:0] if_rd_addr [R];
  logic        if_vld_q   [R];
  logic        wt_rd_en   [C];
  logic [11:0] wt_rd_addr [C];
  logic        wt_vld_q   [C];
  logic        of_wr_en   [C];
  logic [9:0]  of_wr_addr [C];

  int checks = 0, failures = 0;

  stos_controller #(.ROWS(R), .COLS(C), .IF_AW(12), .WT_AW(12), .OF_AW(10)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  bit prev_if_en [R];
  bit prev_wt_en [C];

  task automatic run(dataflow_e mode, int len, int folds, int ib, int is, int wb, int ws, int ob, int os);
    int T, F, total_cycles;
    @(negedge clk);
    cmd.mode = mode; cmd.len = 16'(len); cmd.folds = 16'(folds);
    cmd.ibase = 16'(ib); cmd.istride = 16'(is);
    cmd.wbase = 16'(wb); cmd.wstride = 16'(ws);
    cmd.obase = 16'(ob); cmd.ostride = 16'(os);
    start = 1;
    @(negedge clk);
    start = 0;
    T = (mode == DF_STOS) ? C + len - 1 : len + ((R > C) ? R : C) - 1;
    F = (mode == DF_STOS) ? 2 : ((R < C) ? R : C) + 1;
    total_cycles = 0;
    for (int f = 0; f < folds; f++) begin
      int ibf = ib + f*is, wbf = wb + f*ws, obf = ob + f*os;
      // clear
      chk("busy", busy, 1); chk("clr", arr_clr, 1); chk("data_en", data_en, mode == DF_STOS);
      for (int r = 0; r < R; r++) prev_if_en[r] = 0;
      for (int c = 0; c < C; c++) prev_wt_en[c] = 0;
      @(negedge clk); total_cycles++;
      // stream
      for (int t = 0; t < T; t++) begin
        chk("mac_en", arr_mac_en, 1); chk("clr0", arr_clr, 0); chk("drain0", arr_drain, 0);
        for (int r = 0; r < R; r++) begin
          bit en; int a;
          if (mode == DF_STOS) begin en = 1; a = ibf + (C + len - 2 - t); end
          else begin en = (t >= r) && (t - r < len); a = ibf + t - r; end
          chk("if_vld_q", if_vld_q[r], prev_if_en[r]);
          chk("if_rd_en", if_rd_en[r], en);
          if (en) chk("if_rd_addr", if_rd_addr[r], a % 4096);
          prev_if_en[r] = en;
        end
        for (int c = 0; c < C; c++) begin
          bit en; int a;
          if (mode == DF_STOS) begin en = (t >= C - 1); a = wbf + (C + len - 2 - t); end
          else begin en = (t >= c) && (t - c < len); a = wbf + t - c; end
          chk("wt_vld_q", wt_vld_q[c], prev_wt_en[c]);
          chk("wt_rd_en", wt_rd_en[c], en);
          if (en) chk("wt_rd_addr", wt_rd_addr[c], a % 4096);
          prev_wt_en[c] = en;
        end
        @(negedge clk); total_cycles++;
      end
      for (int t = 0; t < F; t++) begin
        chk("flush mac_en", arr_mac_en, 1);
        chk("flush no read", if_rd_en[0], 0);
        @(negedge clk); total_cycles++;
      end
      for (int d = 0; d < R; d++) begin
        chk("drain", arr_drain, 1); chk("drain mac off", arr_mac_en, 0);
        for (int c = 0; c < C; c++) begin
          chk("of_wr_en", of_wr_en[c], 1);
          chk("of_wr_addr", of_wr_addr[c], (obf + R - 1 - d) % 1024);
        end
        if (d == R - 1 && f == folds - 1) begin
          @(negedge clk); total_cycles++;
          chk("done pulse", done, 1);
        end else begin
          @(negedge clk); total_cycles++;
        end
      end
    end
    chk("idle after", busy, 0);
    chk("cycles", total_cycles, folds * (1 + T + F + R));
    @(negedge clk);
    chk("done one cycle", done, 0);
  endtask

  initial begin
    start = 0; cmd = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk("idle", busy, 0);
    run(DF_STOS, 3, 2, 100, 16, 7, 3, 0, 16);
    run(DF_OS,  24, 2, 5, 24, 9, 24, 40, 16);
    run(DF_STOS, 7, 1, 4000, 0, 0, 0, 1000, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

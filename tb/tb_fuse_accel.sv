// tb_fuse_accel: end-to-end test of the accelerator at its reference size
// (16x16 array, three 64 KB buffers), running one complete FuSe-Half layer.
//
// Layer: input 8x8 with 4 channels, K = 3 with one zero of padding on each
// side, 16 output channels. FuSe-Half splits the channels: channels 0 and 1
// get 1x3 row filters, channels 2 and 3 get 3x1 column filters; the four
// resulting 8x8 maps are then combined by a 1x1 pointwise convolution.
//   Step 1  ST-OS, row filters: array row r convolves spatial row r%8 of
//           channel r/8; rows 0-7 share weight bank 0 and rows 8-15 share
//           bank 1 (hybrid of spatial-first and channels-first mapping).
//   Step 2  ST-OS, column filters: array row r convolves column r%8 of
//           channel 2 + r/8 (the buffer holds the columns).
//   Step 3  the host reads the 32-bit results, requantises them to 8 bits
//           (arithmetic shift right by 3, saturate) and writes them back as
//           pixel-major rows for the pointwise step.
//   Step 4  OS, pointwise: 64 pixels x 4 channels times 4 x 16 weights,
//           four folds of 16 pixels.
// Every OFMAP word is compared with a reference computed here directly from
// the layer definition, and each command's cycle count with
// folds * (1 + T + F + 16) + 1 (done is registered). The test also counts the mechanisms it expects to
// exercise (ST-OS command, OS command, dataflow switch, multi-fold command,
// rows sharing one broadcast filter, distinct filters on different rows) and
// counts a failure for any that never happened.
module tb_fuse_accel;
  import fuse_pkg::*;
  localparam int S    = 16;
  localparam int H    = 8;
  localparam int WD   = 8;
  localparam int CH   = 4;
  localparam int K    = 3;
  localparam int COUT = 16;
  localparam int SH   = 3;    // requantisation shift

  logic        clk = 0, rst_n = 0;
  logic        cmd_start;
  cmd_t        cmd;
  logic        busy, done;
  logic [3:0]  row_wsel [S];
  logic        if_wr_en;   logic [3:0] if_wr_bank; logic [11:0] if_wr_addr; logic [7:0] if_wr_data;
  logic        wt_wr_en;   logic [3:0] wt_wr_bank; logic [11:0] wt_wr_addr; logic [7:0] wt_wr_data;
  logic        of_rd_en;   logic [3:0] of_rd_bank; logic [9:0]  of_rd_addr; logic [31:0] of_rd_data;

  fuse_accel dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stos = 0, n_os = 0, n_switch = 0, n_multifold = 0, n_shared = 0, n_distinct = 0;
  dataflow_e last_mode = DF_OS;
  bit        any_cmd = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host helpers ----------------
  task automatic if_write(int bank, int addr, int data);
    @(negedge clk);
    if_wr_en = 1; if_wr_bank = 4'(bank); if_wr_addr = 12'(addr); if_wr_data = 8'(data);
    @(negedge clk);
    if_wr_en = 0;
  endtask

  task automatic wt_write(int bank, int addr, int data);
    @(negedge clk);
    wt_wr_en = 1; wt_wr_bank = 4'(bank); wt_wr_addr = 12'(addr); wt_wr_data = 8'(data);
    @(negedge clk);
    wt_wr_en = 0;
  endtask

  task automatic of_read(int bank, int addr, output int data);
    @(negedge clk);
    of_rd_en = 1; of_rd_bank = 4'(bank); of_rd_addr = 10'(addr);
    @(negedge clk);
    of_rd_en = 0;
    data = int'(of_rd_data);
  endtask

  task automatic run_cmd(dataflow_e mode, int len, int folds, int ib, int is, int wb, int ws,
                         int ob, int os);
    int cyc, T, F;
    @(negedge clk);
    cmd = '0;
    cmd.mode = mode; cmd.len = 16'(len); cmd.folds = 16'(folds);
    cmd.ibase = 16'(ib); cmd.istride = 16'(is); cmd.wbase = 16'(wb); cmd.wstride = 16'(ws);
    cmd.obase = 16'(ob); cmd.ostride = 16'(os);
    cmd_start = 1;
    @(negedge clk);
    cmd_start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    T = (mode == DF_STOS) ? S + len - 1 : len + S - 1;
    F = (mode == DF_STOS) ? 2 : S + 1;
    // done is registered: it rises one cycle after the last drain cycle
    checks++;
    if (cyc != folds * (1 + T + F + S) + 1) begin
      failures++;
      $display("FAIL cycle count %0d expected %0d", cyc, folds * (1 + T + F + S) + 1);
    end
    if (mode == DF_STOS) n_stos++; else n_os++;
    if (any_cmd && mode != last_mode) n_switch++;
    if (folds > 1) n_multifold++;
    last_mode = mode; any_cmd = 1;
  endtask

  task automatic expect_of(string tag, int bank, int addr, longint exp);
    int got;
    of_read(bank, addr, got);
    checks++;
    if (got != int'(exp)) begin
      failures++;
      if (failures < 20) $display("FAIL %s bank %0d addr %0d got %0d expected %0d", tag, bank, addr, got, exp);
    end
  endtask

  // ---------------- layer data and reference ----------------
  int x    [CH][H][WD];      // input
  int wf   [CH][K];          // row filters (ch 0,1) and column filters (ch 2,3)
  int wp   [CH][COUT];       // pointwise weights
  longint mid  [CH][H][WD];  // after the FuSe filters (32-bit)
  int     q    [CH][H][WD];  // requantised
  longint outp [H*WD][COUT];

  function automatic int px(int ch, int y, int xx);  // zero padded input
    if (y < 0 || y >= H || xx < 0 || xx >= WD) return 0;
    return x[ch][y][xx];
  endfunction

  function automatic int requant(longint v);
    longint s = v >>> SH;
    if (s > 127) return 127;
    if (s < -128) return -128;
    return int'(s);
  endfunction

  initial begin
    cmd_start = 0; cmd = '0;
    if_wr_en = 0; if_wr_bank = 0; if_wr_addr = 0; if_wr_data = 0;
    wt_wr_en = 0; wt_wr_bank = 0; wt_wr_addr = 0; wt_wr_data = 0;
    of_rd_en = 0; of_rd_bank = 0; of_rd_addr = 0;
    for (int r = 0; r < S; r++) row_wsel[r] = 4'(r);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    for (int c = 0; c < CH; c++) for (int y = 0; y < H; y++) for (int xx = 0; xx < WD; xx++)
      x[c][y][xx] = $signed(8'($urandom));
    for (int c = 0; c < CH; c++) for (int k = 0; k < K; k++) wf[c][k] = $signed(8'($urandom));
    for (int c = 0; c < CH; c++) for (int o = 0; o < COUT; o++) wp[c][o] = $signed(8'($urandom));

    // reference: FuSe-Half filters, 'same' output size with padding 1
    for (int c = 0; c < CH; c++) for (int y = 0; y < H; y++) for (int xx = 0; xx < WD; xx++) begin
      mid[c][y][xx] = 0;
      for (int k = 0; k < K; k++)
        if (c < CH/2) mid[c][y][xx] += longint'(px(c, y, xx + k - 1)) * wf[c][k];
        else          mid[c][y][xx] += longint'(px(c, y + k - 1, xx)) * wf[c][k];
      q[c][y][xx] = requant(mid[c][y][xx]);
    end
    for (int p = 0; p < H*WD; p++) for (int o = 0; o < COUT; o++) begin
      outp[p][o] = 0;
      for (int c = 0; c < CH; c++) outp[p][o] += longint'(q[c][p / WD][p % WD]) * wp[c][o];
    end

    // ---------------- step 1 and 2 data: padded slices, 18 samples each ----------------
    // IFMAP bank r: row slice at 0..17, column slice at 32..49
    for (int r = 0; r < S; r++)
      for (int i = 0; i < S + K - 1; i++) begin
        if_write(r, i,      px(r / 8,     r % 8, i - 1));  // row filters: ch 0/1, row r%8
        if_write(r, 32 + i, px(2 + r / 8, i - 1, r % 8));  // column filters: ch 2/3, column r%8
      end
    for (int c = 0; c < CH; c++) for (int k = 0; k < K; k++) wt_write(c, k, wf[c][k]);

    // step 1: row filters
    for (int r = 0; r < S; r++) row_wsel[r] = 4'(r / 8);
    run_cmd(DF_STOS, K, 1, 0, 0, 0, 0, 0, 0);
    for (int r = 0; r < S; r++) for (int j = 0; j < WD; j++)
      expect_of("row filter", j, r, mid[r / 8][r % 8][j]);

    // step 2: column filters
    for (int r = 0; r < S; r++) row_wsel[r] = 4'(2 + r / 8);
    run_cmd(DF_STOS, K, 1, 32, 0, 0, 0, 16, 0);
    for (int r = 0; r < S; r++) for (int j = 0; j < H; j++)
      expect_of("column filter", j, 16 + r, mid[2 + r / 8][j][r % 8]);

    // broadcast sharing seen in steps 1-2
    for (int r = 1; r < S; r++) if (r / 8 == (r - 1) / 8) n_shared++;
    for (int r = 8; r < S; r++) n_distinct++;

    // ---------------- step 3: host requantises and re-lays out ----------------
    for (int p = 0; p < H*WD; p++)
      for (int c = 0; c < CH; c++) begin
        int raw, yy, xx;
        yy = p / WD; xx = p % WD;
        if (c < CH/2) of_read(xx, (c * 8) + yy, raw);            // step-1 layout
        else          of_read(yy, 16 + (c - 2) * 8 + xx, raw);   // step-2 layout
        if_write(p % S, 64 + (p / S) * CH + c, requant(longint'(raw)));
      end
    for (int c = 0; c < CH; c++) for (int o = 0; o < COUT; o++) wt_write(o, 64 + c, wp[c][o]);

    // ---------------- step 4: pointwise, output stationary, 4 folds ----------------
    run_cmd(DF_OS, CH, (H*WD) / S, 64, CH, 64, 0, 32, S);
    for (int p = 0; p < H*WD; p++) for (int o = 0; o < COUT; o++)
      expect_of("pointwise", o, 32 + (p / S) * S + (p % S), outp[p][o]);

    // ---------------- mechanisms ----------------
    $display("mechanisms: stos=%0d os=%0d switch=%0d multifold=%0d shared_rows=%0d distinct_rows=%0d",
             n_stos, n_os, n_switch, n_multifold, n_shared, n_distinct);
    checks += 6;
    if (n_stos == 0)      begin failures++; $display("FAIL no ST-OS command"); end
    if (n_os == 0)        begin failures++; $display("FAIL no OS command"); end
    if (n_switch == 0)    begin failures++; $display("FAIL no dataflow switch"); end
    if (n_multifold == 0) begin failures++; $display("FAIL no multi-fold command"); end
    if (n_shared == 0)    begin failures++; $display("FAIL no shared broadcast"); end
    if (n_distinct == 0)  begin failures++; $display("FAIL no distinct broadcast"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_workload_mbv2_block: the last MobileNet-V2 bottleneck block, with its
// depthwise convolution replaced by FuSe-Half, run at full size on the
// reference accelerator (16x16 array, 64 KB buffers).
//
// Block (standard MobileNet-V2 shape): input 7x7x160.
//   1. expansion   1x1 convolution 160 -> 960 channels      (OS dataflow)
//   2. FuSe-Half   channels 0-479: 1x3 row filters,
//                  channels 480-959: 3x1 column filters,
//                  padding 1, stride 1                      (ST-OS dataflow)
//   3. projection  1x1 convolution 960 -> 320 channels      (OS dataflow)
// Between steps the host (this testbench) reads the 32-bit results, and
// requantises them to 8 bits by an arithmetic right shift and saturation.
// Batch normalisation and the activation function are left out.
//
// Pointwise mapping: array rows are 16 pixels (4 pixel folds for 49 pixels,
// the last one partly empty), array columns 16 output channels. The IFMAP
// buffer holds all pixel folds (4 x 960 bytes per bank). The weight buffer
// holds floor(4096/Cin) output-channel groups per fill; one command per group
// runs the 4 pixel folds.
// FuSe mapping (hybrid): a fold takes two channels; array rows 0-6 hold the
// 7 slices of the first channel and share weight bank 0, rows 7-13 hold the
// second channel and share bank 1, rows 14-15 idle. Commands of at most 64
// folds, limited by the OFMAP capacity.
//
// Every 32-bit result of every step is compared with a direct computation
// done here, and every command's cycle count with folds*(1+T+F+16)+1. The
// array cycles of each step are printed.
module tb_workload_mbv2_block;
  import fuse_pkg::*;
  localparam int S     = 16;
  localparam int HW    = 7;
  localparam int P     = HW * HW;        // 49 pixels
  localparam int CIN   = 160;
  localparam int CEXP  = 960;
  localparam int COUT  = 320;
  localparam int HALF  = CEXP / 2;
  localparam int K     = 3;
  localparam int SLOT  = S + K - 1;      // samples streamed per slice (18)
  localparam int FOLDS = HALF / 2;       // 240 ST-OS folds per direction
  localparam int FPC   = 64;             // ST-OS folds per command
  localparam int SH1   = 9;              // requantisation after expansion
  localparam int SH2   = 6;              // requantisation after FuSe

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

  int     checks = 0, failures = 0;
  longint busy_cycles = 0;

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host side: one word per clock ----------------
  task automatic if_write(int bank, int addr, int data);
    if_wr_en = 1; if_wr_bank = 4'(bank); if_wr_addr = 12'(addr); if_wr_data = 8'(data);
    @(negedge clk);
    if_wr_en = 0;
  endtask

  task automatic wt_write(int bank, int addr, int data);
    wt_wr_en = 1; wt_wr_bank = 4'(bank); wt_wr_addr = 12'(addr); wt_wr_data = 8'(data);
    @(negedge clk);
    wt_wr_en = 0;
  endtask

  task automatic of_read(int bank, int addr, output int data);
    of_rd_en = 1; of_rd_bank = 4'(bank); of_rd_addr = 10'(addr);
    @(negedge clk);
    of_rd_en = 0;
    data = int'(of_rd_data);
  endtask

  task automatic run_cmd(dataflow_e mode, int len, int folds, int ib, int is, int wb, int ws,
                         int ob, int os);
    int cyc, T, F;
    cmd = '0;
    cmd.mode = mode; cmd.len = 16'(len); cmd.folds = 16'(folds);
    cmd.ibase = 16'(ib); cmd.istride = 16'(is); cmd.wbase = 16'(wb); cmd.wstride = 16'(ws);
    cmd.obase = 16'(ob); cmd.ostride = 16'(os);
    cmd_start = 1;
    @(negedge clk);
    cmd_start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    busy_cycles += cyc;
    T = (mode == DF_STOS) ? S + len - 1 : len + S - 1;
    F = (mode == DF_STOS) ? 2 : S + 1;
    checks++;
    if (cyc != folds * (1 + T + F + S) + 1) begin
      failures++;
      $display("FAIL cycles %0d expected %0d", cyc, folds * (1 + T + F + S) + 1);
    end
  endtask

  task automatic compare(string tag, int got, longint exp);
    checks++;
    if (got != int'(exp)) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", tag, got, exp);
    end
  endtask

  function automatic int requant(longint v, int sh);
    longint s = v >>> sh;
    if (s > 127) return 127;
    if (s < -128) return -128;
    return int'(s);
  endfunction

  // ---------------- tensors ----------------
  byte    pw_a   [P][CEXP];        // pointwise input, pixel-major
  byte    pw_b   [CEXP][CEXP];     // pointwise weights [cin][cout]
  int     pw_out [P][CEXP];        // pointwise results read back
  byte    x  [CEXP][HW][HW];       // FuSe input
  byte    w  [CEXP][K];            // FuSe filters
  int     mid [CEXP][HW][HW];      // FuSe results read back
  byte    in0  [P][CIN];
  byte    wexp [CIN][CEXP];
  byte    wprj [CEXP][COUT];

  // 1x1 convolution of pw_a (np x cin) with pw_b (cin x cout) into pw_out
  task automatic pointwise(int np, int cin, int cout, string tag);
    int groups = (np + S - 1) / S;
    int hpf    = 4096 / cin;         // output-channel groups per weight fill
    int ngrp   = cout / S;
    for (int g = 0; g < groups; g++)
      for (int r = 0; r < S; r++)
        for (int c = 0; c < cin; c++)
          if_write(r, g * cin + c, (g * S + r < np) ? pw_a[g * S + r][c] : 0);
    for (int h0 = 0; h0 < ngrp; h0 += hpf) begin
      int nh = (ngrp - h0 < hpf) ? ngrp - h0 : hpf;
      for (int h = 0; h < nh; h++)
        for (int c = 0; c < S; c++)
          for (int k = 0; k < cin; k++)
            wt_write(c, h * cin + k, pw_b[k][(h0 + h) * S + c]);
      for (int h = 0; h < nh; h++) begin
        run_cmd(DF_OS, cin, groups, 0, cin, h * cin, 0, 0, S);
        for (int g = 0; g < groups; g++)
          for (int r = 0; r < S; r++)
            if (g * S + r < np)
              for (int c = 0; c < S; c++) begin
                int got, o, p;
                longint exp = 0;
                p = g * S + r; o = (h0 + h) * S + c;
                of_read(c, g * S + r, got);
                for (int k = 0; k < cin; k++) exp += longint'(pw_a[p][k]) * pw_b[k][o];
                compare(tag, got, exp);
                pw_out[p][o] = got;
              end
      end
    end
  endtask

  function automatic int px(int c, int y, int xx);
    if (y < 0 || y >= HW || xx < 0 || xx >= HW) return 0;
    return x[c][y][xx];
  endfunction

  // sample i of slice s of channel c: image row s (dir 0) or image column s (dir 1)
  function automatic int sample(int dir, int c, int s, int i);
    if (dir == 0) return px(c, s, i - 1);
    return px(c, i - 1, s);
  endfunction

  task automatic fuse_half();
    for (int r = 0; r < S; r++) row_wsel[r] = (r < HW) ? 4'd0 : 4'd1;
    for (int dir = 0; dir < 2; dir++) begin
      int cbase = dir * HALF;
      for (int f0 = 0; f0 < FOLDS; f0 += FPC) begin
        int nf = (FOLDS - f0 < FPC) ? FOLDS - f0 : FPC;
        // fold f0+f, row r -> channel cbase + 2(f0+f) + r/7, slice r%7
        for (int f = 0; f < nf; f++) begin
          for (int r = 0; r < 2 * HW; r++)
            for (int i = 0; i < SLOT; i++)
              if_write(r, f * SLOT + i, sample(dir, cbase + 2*(f0 + f) + r / HW, r % HW, i));
          for (int k = 0; k < K; k++) begin
            wt_write(0, f * K + k, w[cbase + 2*(f0 + f)][k]);
            wt_write(1, f * K + k, w[cbase + 2*(f0 + f) + 1][k]);
          end
        end
        run_cmd(DF_STOS, K, nf, 0, SLOT, 0, K, 0, S);
        for (int f = 0; f < nf; f++)
          for (int r = 0; r < 2 * HW; r++)
            for (int j = 0; j < HW; j++) begin
              int got, c, s;
              longint exp = 0;
              c = cbase + 2*(f0 + f) + r / HW; s = r % HW;
              of_read(j, f * S + r, got);
              for (int k = 0; k < K; k++) exp += longint'(sample(dir, c, s, j + k)) * w[c][k];
              compare("fuse", got, exp);
              if (dir == 0) mid[c][s][j] = got;
              else          mid[c][j][s] = got;
            end
      end
    end
  endtask

  initial begin
    longint c0;
    cmd_start = 0; cmd = '0;
    if_wr_en = 0; if_wr_bank = 0; if_wr_addr = 0; if_wr_data = 0;
    wt_wr_en = 0; wt_wr_bank = 0; wt_wr_addr = 0; wt_wr_data = 0;
    of_rd_en = 0; of_rd_bank = 0; of_rd_addr = 0;
    for (int r = 0; r < S; r++) row_wsel[r] = 4'(r);
    for (int p = 0; p < P; p++) for (int c = 0; c < CIN; c++) in0[p][c] = byte'($urandom);
    for (int i = 0; i < CIN; i++) for (int o = 0; o < CEXP; o++) wexp[i][o] = byte'($urandom);
    for (int i = 0; i < CEXP; i++) for (int o = 0; o < COUT; o++) wprj[i][o] = byte'($urandom);
    for (int c = 0; c < CEXP; c++) for (int k = 0; k < K; k++) w[c][k] = byte'($urandom);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk);

    // 1. expansion
    for (int p = 0; p < P; p++) for (int c = 0; c < CIN; c++) pw_a[p][c] = in0[p][c];
    for (int i = 0; i < CIN; i++) for (int o = 0; o < CEXP; o++) pw_b[i][o] = wexp[i][o];
    c0 = busy_cycles;
    pointwise(P, CIN, CEXP, "expansion");
    $display("expansion 1x1 (160->960): %0d array cycles", busy_cycles - c0);

    // 2. FuSe-Half filters
    for (int p = 0; p < P; p++) for (int c = 0; c < CEXP; c++)
      x[c][p / HW][p % HW] = byte'(requant(longint'(pw_out[p][c]), SH1));
    c0 = busy_cycles;
    fuse_half();
    $display("FuSe-Half 1x3/3x1 (960 ch): %0d array cycles", busy_cycles - c0);

    // 3. projection
    for (int p = 0; p < P; p++) for (int c = 0; c < CEXP; c++)
      pw_a[p][c] = byte'(requant(longint'(mid[c][p / HW][p % HW]), SH2));
    for (int i = 0; i < CEXP; i++) for (int o = 0; o < COUT; o++) pw_b[i][o] = wprj[i][o];
    c0 = busy_cycles;
    pointwise(P, CEXP, COUT, "projection");
    $display("projection 1x1 (960->320): %0d array cycles", busy_cycles - c0);

    $display("whole block: %0d array cycles", busy_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

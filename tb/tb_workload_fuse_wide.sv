// tb_workload_fuse_wide: FuSe-Half layers whose feature maps are wider than
// the array, with the three kernel sizes of the searched design space
// (3, 5 and 7), run at full size on the reference accelerator (16x16 array,
// 64 KB buffers).
//
// Layers (shapes of typical inverted-residual stages, chosen here; the
// published evaluation does not list per-layer shapes):
//   56x56x144, K = 3   (an early MobileNet-V2 stage)
//   28x28x120, K = 5   (a MobileNet-V3-Large stage with 5x5 kernels)
//   14x14x480, K = 7   (a 14x14 stage with the largest searchable kernel)
//   28x28x120, K = 5   again, as FuSe-Full
// FuSe-Half: channels 0..C/2-1 get 1xK row filters, the rest Kx1 column
// filters (C outputs). FuSe-Full: every channel gets both, with separate
// weights (2C outputs); the hardware runs it the same way, with twice the
// slices. Zero padding (K-1)/2, stride 1.
//
// Mapping (spatial tiling, channels-first): a 1D slice is one image row (or
// column) of one channel; a line of W outputs is cut into ceil(W/16) tiles of
// 16 outputs. Each tile streams its own 16+K-1 samples, including the K-1
// halo samples it shares with its neighbours. Tiles of all slices are listed
// in order and packed 16 per fold, one per array row; row r always takes its
// filter from weight bank r, which the host loads per fold. Commands of at
// most 64 folds (the OFMAP capacity at 16 words per fold and bank).
//
// Every array output (all 16 columns of every used row) is compared with a
// direct computation and every command's cycle count with
// folds*(1+T+F+16)+1. The test fails if no tile with a halo from a
// neighbouring tile, or no partly used last tile, was run.
module tb_workload_fuse_wide;
  import fuse_pkg::*;
  localparam int S    = 16;
  localparam int FPC  = 64;
  localparam int MAXC = 480;
  localparam int MAXW = 56;

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
  int     halo_tiles = 0, part_tiles = 0;
  longint busy_cycles = 0;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  task automatic run_stos(int k, int folds, int slot);
    int cyc, T, F;
    cmd = '0;
    cmd.mode = DF_STOS; cmd.len = 16'(k); cmd.folds = 16'(folds);
    cmd.istride = 16'(slot); cmd.wstride = 16'(k); cmd.ostride = 16'(S);
    cmd_start = 1;
    @(negedge clk);
    cmd_start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    busy_cycles += cyc;
    T = S + k - 1;
    F = 2;
    checks++;
    if (cyc != folds * (1 + T + F + S) + 1) begin
      failures++;
      $display("FAIL cycles %0d expected %0d", cyc, folds * (1 + T + F + S) + 1);
    end
  endtask

  byte x [MAXC][MAXW][MAXW];
  byte w [2*MAXC][7];

  // sample i of the tile window starting at output position p0, on line s of
  // output channel c: along the row (row filters) or down the column (column
  // filters). FuSe-Half: output channel c < C/2 is a row filter on input
  // channel c. FuSe-Full: output channel c < C is a row filter on input
  // channel c, c >= C a column filter on input channel c - C.
  function automatic int sample(int hw, int pad, int ch, bit full, int c, int s, int p0, int i);
    int pos = p0 + i - pad;
    int src = (full && c >= ch) ? c - ch : c;
    bit row = full ? (c < ch) : (c < ch / 2);
    if (pos < 0 || pos >= hw) return 0;
    return row ? x[src][s][pos] : x[src][pos][s];
  endfunction

  task automatic fuse_layer(int hw, int ch, int k, bit full);
    int nout  = full ? 2 * ch : ch;       // output channels
    int pad   = (k - 1) / 2;
    int tiles = (hw + S - 1) / S;
    int slot  = S + k - 1;
    int nsl   = nout * hw * tiles;        // slice tiles in the layer
    int folds = (nsl + S - 1) / S;
    longint c0 = busy_cycles;
    for (int c = 0; c < ch; c++) begin
      for (int a = 0; a < hw; a++) for (int b = 0; b < hw; b++) x[c][a][b] = byte'($urandom);
    end
    for (int c = 0; c < nout; c++)
      for (int j = 0; j < k; j++) w[c][j] = byte'($urandom);
    for (int f0 = 0; f0 < folds; f0 += FPC) begin
      int nf = (folds - f0 < FPC) ? folds - f0 : FPC;
      // tile q = ((c * hw) + s) * tiles + t
      for (int f = 0; f < nf; f++)
        for (int r = 0; r < S; r++) begin
          int q, c, s, t;
          q = (f0 + f) * S + r;
          c = q / (hw * tiles); s = (q / tiles) % hw; t = q % tiles;
          for (int i = 0; i < slot; i++)
            if_write(r, f * slot + i, (q < nsl) ? sample(hw, pad, ch, full, c, s, t * S, i) : 0);
          for (int j = 0; j < k; j++)
            wt_write(r, f * k + j, (q < nsl) ? w[c][j] : 0);
        end
      run_stos(k, nf, slot);
      for (int f = 0; f < nf; f++)
        for (int r = 0; r < S; r++) begin
          int q, c, s, t;
          q = (f0 + f) * S + r;
          c = q / (hw * tiles); s = (q / tiles) % hw; t = q % tiles;
          if (q < nsl) begin
            if (t > 0) halo_tiles++;
            if ((t + 1) * S > hw) part_tiles++;
            for (int j = 0; j < S; j++) begin
              int got;
              longint e;
              e = 0;
              for (int m = 0; m < k; m++)
                e += longint'(sample(hw, pad, ch, full, c, s, t * S, j + m)) * w[c][m];
              of_read(j, f * S + r, got);
              checks++;
              if (got != int'(e)) begin
                failures++;
                if (failures < 10)
                  $display("FAIL %0dx%0dx%0d K=%0d ch %0d line %0d tile %0d col %0d: got %0d expected %0d",
                           hw, hw, ch, k, c, s, t, j, got, e);
              end
            end
          end
        end
    end
    $display("%s %0dx%0dx%0d K=%0d: %0d slice tiles, %0d folds, %0d array cycles",
             full ? "FuSe-Full" : "FuSe-Half", hw, hw, ch, k, nsl, folds, busy_cycles - c0);
  endtask

  initial begin
    cmd_start = 0; cmd = '0;
    if_wr_en = 0; if_wr_bank = 0; if_wr_addr = 0; if_wr_data = 0;
    wt_wr_en = 0; wt_wr_bank = 0; wt_wr_addr = 0; wt_wr_data = 0;
    of_rd_en = 0; of_rd_bank = 0; of_rd_addr = 0;
    for (int r = 0; r < S; r++) row_wsel[r] = 4'(r);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk);
    fuse_layer(56, 144, 3, 0);
    fuse_layer(28, 120, 5, 0);
    fuse_layer(14, 480, 7, 0);
    fuse_layer(28, 120, 5, 1);
    $display("tiles with a halo from a neighbour: %0d, partly used tiles: %0d", halo_tiles, part_tiles);
    checks++;
    if (halo_tiles == 0 || part_tiles == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// size_check: drives one accelerator instance of size N x N through an ST-OS
// command (channels-first: every row its own slice and filter, two folds) and
// an OS command (N x L times L x N, one fold), compares every result with a
// direct computation and each command's cycle count with
// folds * (1 + T + F + N) + 1. Used by tb_array_sizes; reports its counts on
// its outputs and raises finished when done.
module size_check #(
  parameter int N = 8
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  import fuse_pkg::*;
  localparam int K   = 5;
  localparam int L   = 2 * N + 3;
  localparam int SW  = (N > 1) ? $clog2(N) : 1;
  localparam int IFD = BUF_BYTES / N;
  localparam int OFD = BUF_BYTES / (N * 4);

  logic             cmd_start;
  cmd_t             cmd;
  logic             busy, done;
  logic [SW-1:0]    row_wsel [N];
  logic             if_wr_en;  logic [SW-1:0] if_wr_bank; logic [$clog2(IFD)-1:0] if_wr_addr; logic [7:0] if_wr_data;
  logic             wt_wr_en;  logic [SW-1:0] wt_wr_bank; logic [$clog2(IFD)-1:0] wt_wr_addr; logic [7:0] wt_wr_data;
  logic             of_rd_en;  logic [SW-1:0] of_rd_bank; logic [$clog2(OFD)-1:0] of_rd_addr; logic [31:0] of_rd_data;

  fuse_accel #(.ROWS(N), .COLS(N)) dut (.*);

  byte x [2][N][N+K-1];
  byte w [2][N][K];
  byte a [N][L];
  byte b [L][N];

  task automatic run_cmd(dataflow_e mode, int len, int folds, int is, int ws, int os);
    int cyc, T, F;
    @(negedge clk);
    cmd = '0;
    cmd.mode = mode; cmd.len = 16'(len); cmd.folds = 16'(folds);
    cmd.istride = 16'(is); cmd.wstride = 16'(ws); cmd.ostride = 16'(os);
    cmd_start = 1;
    @(negedge clk);
    cmd_start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    T = (mode == DF_STOS) ? N + len - 1 : len + N - 1;
    F = (mode == DF_STOS) ? 2 : N + 1;
    checks++;
    if (cyc != folds * (1 + T + F + N) + 1) begin
      failures++;
      $display("FAIL N=%0d cycles %0d expected %0d", N, cyc, folds * (1 + T + F + N) + 1);
    end
  endtask

  task automatic expect_of(int bank, int addr, longint exp);
    @(negedge clk);
    of_rd_en = 1; of_rd_bank = SW'(bank); of_rd_addr = $bits(of_rd_addr)'(addr);
    @(negedge clk);
    of_rd_en = 0;
    checks++;
    if (of_rd_data != 32'(exp)) begin
      failures++;
      if (failures < 10) $display("FAIL N=%0d bank %0d addr %0d got %0d expected %0d", N, bank, addr,
                                  $signed(of_rd_data), exp);
    end
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0;
    cmd_start = 0; cmd = '0;
    if_wr_en = 0; if_wr_bank = 0; if_wr_addr = 0; if_wr_data = 0;
    wt_wr_en = 0; wt_wr_bank = 0; wt_wr_addr = 0; wt_wr_data = 0;
    of_rd_en = 0; of_rd_bank = 0; of_rd_addr = 0;
    for (int r = 0; r < N; r++) row_wsel[r] = SW'(r);
    @(posedge rst_n);

    // ST-OS, two folds, every row its own slice and filter
    for (int f = 0; f < 2; f++)
      for (int r = 0; r < N; r++) begin
        for (int i = 0; i < N + K - 1; i++) begin
          x[f][r][i] = byte'($urandom);
          @(negedge clk);
          if_wr_en = 1; if_wr_bank = SW'(r); if_wr_addr = $bits(if_wr_addr)'(f * (N + K - 1) + i);
          if_wr_data = x[f][r][i];
        end
        for (int k = 0; k < K; k++) begin
          w[f][r][k] = byte'($urandom);
          @(negedge clk);
          if_wr_en = 0;
          wt_wr_en = 1; wt_wr_bank = SW'(r); wt_wr_addr = $bits(wt_wr_addr)'(f * K + k);
          wt_wr_data = w[f][r][k];
        end
        @(negedge clk);
        if_wr_en = 0; wt_wr_en = 0;
      end
    run_cmd(DF_STOS, K, 2, N + K - 1, K, N);
    for (int f = 0; f < 2; f++)
      for (int r = 0; r < N; r++)
        for (int j = 0; j < N; j++) begin
          longint e;
          e = 0;
          for (int k = 0; k < K; k++) e += longint'(x[f][r][j + k]) * w[f][r][k];
          expect_of(j, f * N + r, e);
        end

    // OS: A (N x L) times B (L x N)
    for (int r = 0; r < N; r++)
      for (int k = 0; k < L; k++) begin
        a[r][k] = byte'($urandom);
        b[k][r] = byte'($urandom);
        @(negedge clk);
        if_wr_en = 1; if_wr_bank = SW'(r); if_wr_addr = $bits(if_wr_addr)'(k); if_wr_data = a[r][k];
        wt_wr_en = 1; wt_wr_bank = SW'(r); wt_wr_addr = $bits(wt_wr_addr)'(k); wt_wr_data = b[k][r];
      end
    @(negedge clk);
    if_wr_en = 0; wt_wr_en = 0;
    run_cmd(DF_OS, L, 1, 0, 0, 0);
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        longint e;
          e = 0;
        for (int k = 0; k < L; k++) e += longint'(a[r][k]) * b[k][c];
        expect_of(c, r, e);
      end
    finished = 1;
  end
endmodule

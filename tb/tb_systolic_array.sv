// tb_systolic_array: self-checking test of the PE grid in both dataflows.
//
// 1. Output stationary: a random A (ROWS x KD) and B (KD x COLS) are fed with
//    the usual skew (row r delayed r cycles, column c delayed c cycles); the
//    result must equal A x B computed here. mac_en is held high only up to the
//    cycle the last product reaches PE(ROWS-1,COLS-1), which checks that
//    latency as well.
// 2. ST-OS: every row gets its own random input slice of COLS+K-1 samples,
//    fed last sample first, and its own K-tap filter on the broadcast link,
//    last tap first, during the final K feed cycles; every PE j of row r must
//    end with sum_k x_r[j+k]*w_r[k]. mac_en stops one cycle after the last tap.
// Results leave through drain_out, bottom row first, one row per cycle.
module tb_systolic_array;
  localparam int R  = 16;
  localparam int C  = 16;
  localparam int DW = 8;
  localparam int AW = 32;
  localparam int KD = 20;  // OS reduction depth
  localparam int K  = 5;   // ST-OS filter taps
  localparam int T  = C + K - 1;

  logic clk = 0, rst_n = 0;
  logic data_en, clr, mac_en, drain;
  logic signed [DW-1:0] row_in [R];
  logic signed [DW-1:0] col_in [C];
  logic signed [DW-1:0] bcast  [R];
  logic signed [AW-1:0] drain_out [C];

  int checks = 0, failures = 0;

  systolic_array #(.ROWS(R), .COLS(C), .DATA_W(DW), .ACC_W(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [DW-1:0] A [R][KD];
  logic signed [DW-1:0] B [KD][C];
  logic signed [DW-1:0] X [R][T];
  logic signed [DW-1:0] W [R][K];
  longint               ref_out [R][C];

  task automatic zero_feeds();
    for (int r = 0; r < R; r++) begin row_in[r] = 0; bcast[r] = 0; end
    for (int c = 0; c < C; c++) col_in[c] = 0;
  endtask

  task automatic drain_and_check(string tag);
    drain = 1; mac_en = 0;
    for (int d = 0; d < R; d++) begin
      for (int c = 0; c < C; c++) begin
        checks++;
        if (drain_out[c] != AW'(ref_out[R-1-d][c])) begin
          failures++;
          if (failures < 10)
            $display("FAIL %s out[%0d][%0d] got %0d expected %0d", tag, R-1-d, c,
                     drain_out[c], ref_out[R-1-d][c]);
        end
      end
      @(negedge clk);
    end
    drain = 0;
  endtask

  initial begin
    data_en = 0; clr = 0; mac_en = 0; drain = 0;
    zero_feeds();
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // ---------------- output stationary ----------------
    for (int r = 0; r < R; r++) for (int k = 0; k < KD; k++) A[r][k] = DW'($urandom);
    for (int k = 0; k < KD; k++) for (int c = 0; c < C; c++) B[k][c] = DW'($urandom);
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        ref_out[r][c] = 0;
        for (int k = 0; k < KD; k++) ref_out[r][c] += longint'(A[r][k]) * longint'(B[k][c]);
      end
    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;
    // cycle t: feeds driven; products of feed t valid in PE(0,0) at t+1
    for (int t = 0; t <= R + C + KD - 2; t++) begin
      for (int r = 0; r < R; r++) row_in[r] = (t >= r && t - r < KD) ? A[r][t-r] : '0;
      for (int c = 0; c < C; c++) col_in[c] = (t >= c && t - c < KD) ? B[t-c][c] : '0;
      mac_en = (t >= 1);
      @(negedge clk);
    end
    zero_feeds();
    drain_and_check("OS");

    // ---------------- ST-OS ----------------
    for (int r = 0; r < R; r++) begin
      for (int i = 0; i < T; i++) X[r][i] = DW'($urandom);
      for (int k = 0; k < K; k++) W[r][k] = DW'($urandom);
      for (int j = 0; j < C; j++) begin
        ref_out[r][j] = 0;
        for (int k = 0; k < K; k++) ref_out[r][j] += longint'(X[r][j+k]) * longint'(W[r][k]);
      end
    end
    data_en = 1;
    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;
    for (int t = 0; t <= T; t++) begin
      for (int r = 0; r < R; r++) begin
        row_in[r] = (t < T) ? X[r][T-1-t] : '0;
        bcast[r]  = (t < T && T - 1 - t < K) ? W[r][T-1-t] : '0;
        col_in[r % C] = DW'($urandom);  // must be ignored in ST-OS
      end
      mac_en = (t >= 1);
      @(negedge clk);
    end
    zero_feeds();
    drain_and_check("STOS");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

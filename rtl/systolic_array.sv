// systolic_array: ROWS x COLS grid of PEs with a weight broadcast link per row.
//
// Operands enter on two edges: row_in[r] feeds the left PE of row r and moves
// one PE to the right per clock; col_in[c] feeds the top PE of column c and
// moves one PE down per clock. In addition each row has a broadcast link,
// bcast[r], that reaches the vertical operand selector of every PE in that row
// in the same cycle. With data_en low the grid is a plain output-stationary
// array (matrix product, skewed operands); with data_en high every row is an
// independent 1D convolution engine (ST-OS): activations flow along the row
// and the filter tap of the current cycle is broadcast to all its PEs.
//
// clr, mac_en, drain and data_en go to all PEs. While drain is high the
// accumulators shift down by one row per clock; drain_out[c] is the
// accumulator of the bottom PE of column c, so after a computation the rows
// leave the array bottom row first, one row per cycle, ROWS cycles in all.
//
// The grid, the neighbour links and the per-row broadcast links follow the
// published array. Global control wires and the drain-by-shifting scheme are
// this design's own choices.
module systolic_array #(
  parameter int unsigned ROWS   = fuse_pkg::ARRAY_DIM,
  parameter int unsigned COLS   = fuse_pkg::ARRAY_DIM,
  parameter int unsigned DATA_W = fuse_pkg::OPERAND_W,
  parameter int unsigned ACC_W  = fuse_pkg::ACCUM_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     data_en,
  input  logic                     clr,
  input  logic                     mac_en,
  input  logic                     drain,
  input  logic signed [DATA_W-1:0] row_in    [ROWS],
  input  logic signed [DATA_W-1:0] col_in    [COLS],
  input  logic signed [DATA_W-1:0] bcast     [ROWS],
  output logic signed [ACC_W-1:0]  drain_out [COLS]
);

  // h[r][c] enters PE(r,c) from the left; v[r][c] and a[r][c] enter from above.
  logic signed [DATA_W-1:0] h [ROWS][COLS+1];
  logic signed [DATA_W-1:0] v [ROWS+1][COLS];
  logic signed [ACC_W-1:0]  a [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_left
    assign h[r][0] = row_in[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign v[0][c]       = col_in[c];
    assign a[0][c]       = '0;
    assign drain_out[c]  = a[ROWS][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .data_en (data_en),
        .clr     (clr),
        .mac_en  (mac_en),
        .drain   (drain),
        .h_in    (h[r][c]),
        .v_in    (v[r][c]),
        .bc_in   (bcast[r]),
        .acc_in  (a[r][c]),
        .h_out   (h[r][c+1]),
        .v_out   (v[r+1][c]),
        .acc_out (a[r+1][c])
      );
    end
  end

endmodule

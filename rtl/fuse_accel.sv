// fuse_accel: systolic accelerator with the spatial-tiled output stationary
// (ST-OS) dataflow for FuSeConv networks.
//
// A ROWS x COLS array of multiply-accumulate PEs sits between three banked
// buffers: the input feature map buffer on the left edge (bank r feeds row r),
// the weight buffer on the top edge (bank c feeds column c in OS mode) and the
// output feature map buffer below the bottom edge (bank c takes column c).
// Every row also has a weight broadcast link, driven from the weight buffer
// through a per-row bank selector (row_wsel). A controller runs commands:
//   * DF_OS: output-stationary matrix product, for pointwise (1x1) layers;
//   * DF_STOS: one 1D convolution per row (FuSe row or column filters), inputs
//     flowing along the row, filter taps broadcast to the whole row.
// See stos_controller for the data layout and the cycle counts of a fold.
//
// Host side (the buffers are filled and emptied by an outside agent, for
// instance a DMA engine from DRAM, which is not part of this design):
//   if_wr_* / wt_wr_* write one word into a chosen bank of the IFMAP or
//   weight buffer; of_rd_* reads one accumulator word from a chosen OFMAP bank,
//   returned on of_rd_data the next cycle. Commands are given with cmd_start
//   and cmd while busy is low; done pulses when a command ends.
//
// The array with its broadcast links, the OS/ST-OS pair of dataflows, the
// three 64 KB buffers and the 16x16 size follow the published configuration.
// Word widths, banking, host ports and command format are this design's own.
// Reset (rst_n) is asynchronous and active low throughout; Verilator's note
// that it is also used synchronously comes from the controller's assertions.
module fuse_accel
  import fuse_pkg::*;
#(
  parameter int unsigned ROWS     = ARRAY_DIM,
  parameter int unsigned COLS     = ARRAY_DIM,
  parameter int unsigned DATA_W   = fuse_pkg::OPERAND_W,
  parameter int unsigned ACC_W    = fuse_pkg::ACCUM_W,
  parameter int unsigned IF_DEPTH = BUF_BYTES * 8 / (ROWS * DATA_W),
  parameter int unsigned WT_DEPTH = BUF_BYTES * 8 / (COLS * DATA_W),
  parameter int unsigned OF_DEPTH = BUF_BYTES * 8 / (COLS * ACC_W),
  localparam int unsigned IF_AW   = $clog2(IF_DEPTH),
  localparam int unsigned WT_AW   = $clog2(WT_DEPTH),
  localparam int unsigned OF_AW   = $clog2(OF_DEPTH),
  localparam int unsigned RSEL_W  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CSEL_W  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              cmd_start,
  input  cmd_t              cmd,
  output logic              busy,
  output logic              done,
  input  logic [CSEL_W-1:0] row_wsel   [ROWS],  // weight bank broadcast on row r (ST-OS)
  // IFMAP buffer fill
  input  logic              if_wr_en,
  input  logic [RSEL_W-1:0] if_wr_bank,
  input  logic [IF_AW-1:0]  if_wr_addr,
  input  logic [DATA_W-1:0] if_wr_data,
  // weight buffer fill
  input  logic              wt_wr_en,
  input  logic [CSEL_W-1:0] wt_wr_bank,
  input  logic [WT_AW-1:0]  wt_wr_addr,
  input  logic [DATA_W-1:0] wt_wr_data,
  // OFMAP buffer read-out
  input  logic              of_rd_en,
  input  logic [CSEL_W-1:0] of_rd_bank,
  input  logic [OF_AW-1:0]  of_rd_addr,
  output logic [ACC_W-1:0]  of_rd_data
);

  // ---------------- controller ----------------
  logic             data_en, arr_clr, arr_mac_en, arr_drain;
  logic             if_rd_en   [ROWS];
  logic [IF_AW-1:0] if_rd_addr [ROWS];
  logic             if_vld_q   [ROWS];
  logic             wt_rd_en   [COLS];
  logic [WT_AW-1:0] wt_rd_addr [COLS];
  logic             wt_vld_q   [COLS];
  logic             of_wr_en   [COLS];
  logic [OF_AW-1:0] of_wr_addr [COLS];

  stos_controller #(
    .ROWS(ROWS), .COLS(COLS), .IF_AW(IF_AW), .WT_AW(WT_AW), .OF_AW(OF_AW)
  ) u_ctrl (
    .clk, .rst_n,
    .start      (cmd_start),
    .cmd        (cmd),
    .busy       (busy),
    .done       (done),
    .data_en    (data_en),
    .arr_clr    (arr_clr),
    .arr_mac_en (arr_mac_en),
    .arr_drain  (arr_drain),
    .if_rd_en, .if_rd_addr, .if_vld_q,
    .wt_rd_en, .wt_rd_addr, .wt_vld_q,
    .of_wr_en, .of_wr_addr
  );

  // ---------------- IFMAP buffer ----------------
  logic              if_wen   [ROWS];
  logic [IF_AW-1:0]  if_waddr [ROWS];
  logic [DATA_W-1:0] if_wdata [ROWS];
  logic [DATA_W-1:0] if_rdata [ROWS];

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      if_wen[r]   = if_wr_en && (32'(if_wr_bank) == r);
      if_waddr[r] = if_wr_addr;
      if_wdata[r] = if_wr_data;
    end
  end

  scratchpad #(.BANKS(ROWS), .DEPTH(IF_DEPTH), .WIDTH(DATA_W)) u_ifmap (
    .clk,
    .rd_en (if_rd_en), .rd_addr (if_rd_addr), .rd_data (if_rdata),
    .wr_en (if_wen),   .wr_addr (if_waddr),   .wr_data (if_wdata)
  );

  // ---------------- weight buffer ----------------
  logic              wt_wen   [COLS];
  logic [WT_AW-1:0]  wt_waddr [COLS];
  logic [DATA_W-1:0] wt_wdata [COLS];
  logic [DATA_W-1:0] wt_rdata [COLS];

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      wt_wen[c]   = wt_wr_en && (32'(wt_wr_bank) == c);
      wt_waddr[c] = wt_wr_addr;
      wt_wdata[c] = wt_wr_data;
    end
  end

  scratchpad #(.BANKS(COLS), .DEPTH(WT_DEPTH), .WIDTH(DATA_W)) u_weight (
    .clk,
    .rd_en (wt_rd_en), .rd_addr (wt_rd_addr), .rd_data (wt_rdata),
    .wr_en (wt_wen),   .wr_addr (wt_waddr),   .wr_data (wt_wdata)
  );

  // ---------------- array edge feeds ----------------
  // Outside the controller's read windows the edges are fed zero.
  logic signed [DATA_W-1:0] row_in [ROWS];
  logic signed [DATA_W-1:0] col_in [COLS];
  logic        [DATA_W-1:0] wt_feed [COLS];
  logic        [DATA_W-1:0] bc_raw [ROWS];
  logic signed [DATA_W-1:0] bcast  [ROWS];

  always_comb begin
    for (int r = 0; r < ROWS; r++) row_in[r] = if_vld_q[r] ? if_rdata[r] : '0;
    for (int c = 0; c < COLS; c++) begin
      wt_feed[c] = wt_vld_q[c] ? wt_rdata[c] : '0;
      col_in[c]  = data_en ? '0 : wt_feed[c];
    end
    for (int r = 0; r < ROWS; r++) bcast[r] = bc_raw[r];
  end

  weight_broadcast_mux #(.ROWS(ROWS), .BANKS(COLS), .DATA_W(DATA_W)) u_bcast (
    .bc_en  (data_en),
    .sel    (row_wsel),
    .wt_in  (wt_feed),
    .bc_out (bc_raw)
  );

  // ---------------- systolic array ----------------
  logic signed [ACC_W-1:0] drain_out [COLS];

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n,
    .data_en (data_en),
    .clr     (arr_clr),
    .mac_en  (arr_mac_en),
    .drain   (arr_drain),
    .row_in  (row_in),
    .col_in  (col_in),
    .bcast   (bcast),
    .drain_out (drain_out)
  );

  // ---------------- OFMAP buffer ----------------
  logic             of_ren   [COLS];
  logic [OF_AW-1:0] of_raddr [COLS];
  logic [ACC_W-1:0] of_rdata [COLS];
  logic [ACC_W-1:0] of_wdata [COLS];
  logic [CSEL_W-1:0] of_rd_bank_q;

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      of_ren[c]   = of_rd_en && (32'(of_rd_bank) == c);
      of_raddr[c] = of_rd_addr;
      of_wdata[c] = drain_out[c];
    end
  end

  scratchpad #(.BANKS(COLS), .DEPTH(OF_DEPTH), .WIDTH(ACC_W)) u_ofmap (
    .clk,
    .rd_en (of_ren),   .rd_addr (of_raddr),   .rd_data (of_rdata),
    .wr_en (of_wr_en), .wr_addr (of_wr_addr), .wr_data (of_wdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        of_rd_bank_q <= '0;
    else if (of_rd_en) of_rd_bank_q <= of_rd_bank;
  end
  assign of_rd_data = of_rdata[of_rd_bank_q];

endmodule

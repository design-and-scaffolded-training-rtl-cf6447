// stos_controller: fold sequencer for the OS / ST-OS systolic array.
//
// A command (fuse_pkg::cmd_t) is accepted on start while busy is low. It runs
// cmd.folds folds; every fold goes through four phases:
//   CLEAR  1 cycle      zero all PE registers (clr);
//   STREAM T cycles     issue buffer reads that feed the array edges;
//   FLUSH  F cycles     let the last operands reach the last PE;
//   DRAIN  ROWS cycles  shift the accumulators out of the bottom edge and
//                       write one array row per cycle into the OFMAP banks.
// and then the three base addresses advance by their strides.
//
// ST-OS (cmd.mode = DF_STOS, data_en high): T = COLS+len-1, F = 2. Every row
// reads its IFMAP bank at the same address; the slice is read from its last
// sample down to its first, and the len filter taps are read from the last
// down to the first during the final len stream cycles. Because the samples
// move right by one PE per cycle while the tap is broadcast, PE j of a row
// sees sample j+k together with tap k, so it accumulates output j of the 1D
// convolution out[j] = sum_k in[j+k]*w[k]; a row yields COLS outputs per fold.
//
// OS (cmd.mode = DF_OS, data_en low): T = len+max(ROWS,COLS)-1,
// F = min(ROWS,COLS)+1. Row r reads A[r][k] at time r+k and column c reads
// B[k][c] at time c+k (the usual skew), so PE(r,c) accumulates
// C[r][c] = sum_k A[r][k]*B[k][c].
//
// Cycles per fold: 1 + T + F + ROWS. Buffer reads take one cycle; the
// *_vld_q outputs are the read-enables delayed to line up with the read data,
// so the datapath can feed zero outside the valid windows.
//
// The two dataflows, the row-per-1D-convolution mapping and the folding
// follow the published design. The command format, the reverse read order,
// the phase structure and the drain scheme are this design's own choices.
//
// Reset is asynchronous and active low. The assertions at the end use rst_n
// as their disable condition, which is why Verilator reports rst_n as both
// an asynchronous reset and a synchronous signal; no logic uses it
// synchronously.
module stos_controller
  import fuse_pkg::*;
#(
  parameter int unsigned ROWS   = ARRAY_DIM,
  parameter int unsigned COLS   = ARRAY_DIM,
  parameter int unsigned IF_AW  = 12,
  parameter int unsigned WT_AW  = 12,
  parameter int unsigned OF_AW  = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  cmd_t             cmd,
  output logic             busy,
  output logic             done,          // one-cycle pulse at the end of the command
  output logic             data_en,       // 1 in ST-OS mode
  output logic             arr_clr,
  output logic             arr_mac_en,
  output logic             arr_drain,
  output logic             if_rd_en   [ROWS],
  output logic [IF_AW-1:0] if_rd_addr [ROWS],
  output logic             if_vld_q   [ROWS],
  output logic             wt_rd_en   [COLS],
  output logic [WT_AW-1:0] wt_rd_addr [COLS],
  output logic             wt_vld_q   [COLS],
  output logic             of_wr_en   [COLS],
  output logic [OF_AW-1:0] of_wr_addr [COLS]
);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_STREAM, S_FLUSH, S_DRAIN} state_e;

  localparam int unsigned MAXRC = (ROWS > COLS) ? ROWS : COLS;
  localparam int unsigned MINRC = (ROWS < COLS) ? ROWS : COLS;

  state_e      state;
  dataflow_e   mode_q;
  logic [31:0] len_q, folds_q, fold_q, t_q;
  logic [31:0] ibase_q, wbase_q, obase_q;
  logic [31:0] istride_q, wstride_q, ostride_q;
  logic [31:0] stream_len, flush_len;

  assign stream_len = (mode_q == DF_STOS) ? (COLS + len_q - 1) : (len_q + MAXRC - 1);
  assign flush_len  = (mode_q == DF_STOS) ? 32'd2 : 32'(MINRC + 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      mode_q    <= DF_OS;
      len_q     <= '0;
      folds_q   <= '0;
      fold_q    <= '0;
      t_q       <= '0;
      ibase_q   <= '0;
      wbase_q   <= '0;
      obase_q   <= '0;
      istride_q <= '0;
      wstride_q <= '0;
      ostride_q <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mode_q    <= cmd.mode;
          len_q     <= 32'(cmd.len);
          folds_q   <= 32'(cmd.folds);
          ibase_q   <= 32'(cmd.ibase);
          wbase_q   <= 32'(cmd.wbase);
          obase_q   <= 32'(cmd.obase);
          istride_q <= 32'(cmd.istride);
          wstride_q <= 32'(cmd.wstride);
          ostride_q <= 32'(cmd.ostride);
          fold_q    <= '0;
          t_q       <= '0;
          state     <= S_CLEAR;
        end
        S_CLEAR: begin
          t_q   <= '0;
          state <= S_STREAM;
        end
        S_STREAM: begin
          if (t_q == stream_len - 1) begin
            t_q   <= '0;
            state <= S_FLUSH;
          end else t_q <= t_q + 1;
        end
        S_FLUSH: begin
          if (t_q == flush_len - 1) begin
            t_q   <= '0;
            state <= S_DRAIN;
          end else t_q <= t_q + 1;
        end
        S_DRAIN: begin
          if (t_q == ROWS - 1) begin
            t_q     <= '0;
            ibase_q <= ibase_q + istride_q;
            wbase_q <= wbase_q + wstride_q;
            obase_q <= obase_q + ostride_q;
            if (fold_q + 1 >= folds_q) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              fold_q <= fold_q + 1;
              state  <= S_CLEAR;
            end
          end else t_q <= t_q + 1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy       = (state != S_IDLE);
  assign data_en    = (mode_q == DF_STOS);
  assign arr_clr    = (state == S_CLEAR);
  assign arr_mac_en = (state == S_STREAM) || (state == S_FLUSH);
  assign arr_drain  = (state == S_DRAIN);

  // Read address generation.
  logic [31:0] rev;  // ST-OS: index counted down from the end of the slice
  assign rev = stream_len - 1 - t_q;

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      if_rd_en[r]   = 1'b0;
      if_rd_addr[r] = '0;
      if (state == S_STREAM) begin
        if (mode_q == DF_STOS) begin
          if_rd_en[r]   = 1'b1;
          if_rd_addr[r] = IF_AW'(ibase_q + rev);
        end else if (t_q >= 32'(r) && (t_q - 32'(r)) < len_q) begin
          if_rd_en[r]   = 1'b1;
          if_rd_addr[r] = IF_AW'(ibase_q + t_q - 32'(r));
        end
      end
    end
    for (int c = 0; c < COLS; c++) begin
      wt_rd_en[c]   = 1'b0;
      wt_rd_addr[c] = '0;
      if (state == S_STREAM) begin
        if (mode_q == DF_STOS) begin
          if (rev < len_q) begin
            wt_rd_en[c]   = 1'b1;
            wt_rd_addr[c] = WT_AW'(wbase_q + rev);
          end
        end else if (t_q >= 32'(c) && (t_q - 32'(c)) < len_q) begin
          wt_rd_en[c]   = 1'b1;
          wt_rd_addr[c] = WT_AW'(wbase_q + t_q - 32'(c));
        end
      end
    end
    for (int c = 0; c < COLS; c++) begin
      of_wr_en[c]   = (state == S_DRAIN);
      of_wr_addr[c] = OF_AW'(obase_q + 32'(ROWS - 1) - t_q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) if_vld_q[r] <= 1'b0;
      for (int c = 0; c < COLS; c++) wt_vld_q[c] <= 1'b0;
    end else begin
      for (int r = 0; r < ROWS; r++) if_vld_q[r] <= if_rd_en[r];
      for (int c = 0; c < COLS; c++) wt_vld_q[c] <= wt_rd_en[c];
    end
  end

  // A command is only accepted when idle, and must do some work.
  a_start_idle : assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("stos_controller: start while busy");
  a_cmd_len : assert property (@(posedge clk) disable iff (!rst_n)
                               (start && !busy) |-> (cmd.len != 0 && cmd.folds != 0))
    else $error("stos_controller: command with zero length or zero folds");

endmodule

// weight_broadcast_mux: selects the weight stream for each row broadcast link.
//
// The weight buffer delivers one value per bank per cycle (wt_in[b]). Row r's
// broadcast link carries wt_in[sel[r]]. Giving every row its own bank
// (sel[r] = r) is channels-first mapping: each row convolves a different
// channel with its own filter. Giving several rows the same bank is
// spatial-first mapping: rows holding different spatial slices of one channel
// share one filter read. Mixed settings give the hybrid mapping. When bc_en is
// low all links carry zero, so the array accumulates nothing from them.
//
// Purely combinational. The mapping choices are from the published design;
// implementing the sharing as a per-row bank selector is this design's choice.
module weight_broadcast_mux #(
  parameter int unsigned ROWS   = fuse_pkg::ARRAY_DIM,
  parameter int unsigned BANKS  = fuse_pkg::ARRAY_DIM,
  parameter int unsigned DATA_W = fuse_pkg::OPERAND_W,
  localparam int unsigned SEL_W = (BANKS > 1) ? $clog2(BANKS) : 1
) (
  input  logic              bc_en,
  input  logic [SEL_W-1:0]  sel    [ROWS],
  input  logic [DATA_W-1:0] wt_in  [BANKS],
  output logic [DATA_W-1:0] bc_out [ROWS]
);

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      bc_out[r] = '0;
      if (bc_en && (32'(sel[r]) < BANKS)) bc_out[r] = wt_in[sel[r]];
    end
  end

endmodule

// scratchpad: banked on-chip SRAM buffer placed at one edge of the array.
//
// BANKS independent banks of DEPTH words of WIDTH bits, one bank per array
// lane, so the array can take one word per row (or column) every cycle. Every
// bank has one synchronous read port (rd_data is valid the cycle after rd_en)
// and one write port, usable in the same cycle; a read of the address being
// written returns the old word. The same module serves as input feature map,
// weight and output feature map buffer; their capacity (64 KB each in the
// reference configuration) is BANKS*DEPTH*WIDTH/8 bytes.
//
// The three buffers and their sizes follow the published configuration; the
// banking, the port set and the read latency are this design's own choices.
module scratchpad #(
  parameter int unsigned BANKS = fuse_pkg::ARRAY_DIM,
  parameter int unsigned DEPTH = fuse_pkg::BUF_BYTES / fuse_pkg::ARRAY_DIM,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rd_en   [BANKS],
  input  logic [AW-1:0]    rd_addr [BANKS],
  output logic [WIDTH-1:0] rd_data [BANKS],
  input  logic             wr_en   [BANKS],
  input  logic [AW-1:0]    wr_addr [BANKS],
  input  logic [WIDTH-1:0] wr_data [BANKS]
);

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (rd_en[b]) rd_data[b] <= mem[rd_addr[b]];
      if (wr_en[b]) mem[wr_addr[b]] <= wr_data[b];
    end
  end

endmodule

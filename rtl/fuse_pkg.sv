// fuse_pkg: types and default sizes shared by the ST-OS systolic accelerator.
//
// The accelerator runs FuSeConv layers (1D row/column filters followed by 1x1
// pointwise convolutions) on a square systolic array that supports two
// dataflows, chosen per command:
//   * output stationary (OS): matrix product, operands flow from the left and
//     from the top, each PE keeps one output (used for pointwise layers);
//   * spatial-tiled output stationary (ST-OS): every array row runs its own 1D
//     convolution, input activations flow left to right and the filter taps
//     reach all PEs of the row at once over a per-row broadcast link.
// The 16x16 array and the three 64 KB buffers are the sizes of the reference
// configuration. The 8-bit operands, the 32-bit accumulators and the command
// format are this design's own choices.
package fuse_pkg;

  // Reference configuration.
  localparam int unsigned ARRAY_DIM  = 16;     // rows = columns of the PE grid
  localparam int unsigned OPERAND_W  = 8;      // activation and weight width (signed)
  localparam int unsigned ACCUM_W    = 32;     // accumulator width (signed)
  localparam int unsigned BUF_BYTES  = 65536;  // each of IFMAP, weight and OFMAP buffer

  // Width of the address, length and count fields of a command.
  localparam int unsigned CMD_FIELD_W = 16;

  typedef enum logic [0:0] {
    DF_OS   = 1'b0,  // output stationary, both operands systolic
    DF_STOS = 1'b1   // spatial-tiled output stationary, weights broadcast per row
  } dataflow_e;

  typedef logic [CMD_FIELD_W-1:0] field_t;

  // One command = a sequence of folds sharing a dataflow and a reduction length.
  //   OS  : fold f computes C = A x B, A (ROWS x len) in IFMAP bank r at
  //         ibase+f*istride+k, B (len x COLS) column c in weight bank c at
  //         wbase+f*wstride+k.
  //   STOS: fold f convolves, in every row r, the input slice held in IFMAP
  //         bank r from ibase+f*istride (COLS+len-1 samples) with the len-tap
  //         filter held in weight bank sel[r] from wbase+f*wstride.
  //   Both: the ROWS x COLS results go to OFMAP bank c, row r, at
  //         obase+f*ostride+r.
  typedef struct packed {
    dataflow_e mode;
    field_t    len;      // K taps (STOS) or reduction depth (OS), >= 1
    field_t    folds;    // number of folds, >= 1
    field_t    ibase;
    field_t    istride;
    field_t    wbase;
    field_t    wstride;
    field_t    obase;
    field_t    ostride;
  } cmd_t;

endpackage

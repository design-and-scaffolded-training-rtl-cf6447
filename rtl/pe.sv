// pe: one processing element of the ST-OS systolic array.
//
// The PE holds a horizontal operand register, a vertical operand register, a
// multiplier, an adder and an accumulator register (AccReg). The vertical
// register is loaded through a two-way selector controlled by data_en
// ("DataEn"): with data_en low it takes the systolic value from the PE above,
// with data_en high it takes the weight from the row's broadcast link. Both
// operand registers are passed on unchanged to the right and downward
// neighbours, one hop per clock. Each cycle with mac_en high the product of
// the two registers is added to the accumulator, so the output stays in the
// PE (output stationary).
//
// Timing: operands presented at the inputs are multiplied one cycle later and
// the sum appears in acc_q one cycle after that.
//
// The register/multiplier/adder/accumulator structure and the DataEn selector
// follow the published PE. Own choices: signed two's-complement operands, a
// synchronous clear (clr) that zeroes all three registers before a fold, and
// a drain path (drain high: acc_q <= acc_in, the accumulator of the PE above)
// that shifts finished outputs down the column to the output buffer.
module pe #(
  parameter int unsigned DATA_W = fuse_pkg::OPERAND_W,
  parameter int unsigned ACC_W  = fuse_pkg::ACCUM_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     data_en,  // 1: vertical register takes the broadcast weight
  input  logic                     clr,      // zero operand and accumulator registers
  input  logic                     mac_en,   // accumulate h_q * v_q
  input  logic                     drain,    // shift accumulators down the column
  input  logic signed [DATA_W-1:0] h_in,     // from the left neighbour
  input  logic signed [DATA_W-1:0] v_in,     // from the upper neighbour
  input  logic signed [DATA_W-1:0] bc_in,    // row broadcast link
  input  logic signed [ACC_W-1:0]  acc_in,   // accumulator of the upper neighbour
  output logic signed [DATA_W-1:0] h_out,    // to the right neighbour
  output logic signed [DATA_W-1:0] v_out,    // to the lower neighbour
  output logic signed [ACC_W-1:0]  acc_out   // accumulator, to the lower neighbour
);

  logic signed [DATA_W-1:0]   h_q, v_q;
  logic signed [ACC_W-1:0]    acc_q;
  logic signed [2*DATA_W-1:0] prod;

  assign prod = h_q * v_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_q <= '0;
      v_q <= '0;
    end else if (clr) begin
      h_q <= '0;
      v_q <= '0;
    end else begin
      h_q <= h_in;
      v_q <= data_en ? bc_in : v_in;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc_q <= '0;
    else if (drain)  acc_q <= acc_in;
    else if (clr)    acc_q <= '0;
    else if (mac_en) acc_q <= acc_q + ACC_W'(prod);
  end

  assign h_out   = h_q;
  assign v_out   = v_q;
  assign acc_out = acc_q;

endmodule

// fmul2 -- flexible multiplier of the 2-thread NB-SMT PE.
//
// Two 5b x 9b signed sub-multipliers, each followed by an optional left
// shift by 4, and an adder that sums the two lane products. Depending on
// how the controller drives the operands the unit performs
//   * one unsigned-8b x signed-8b product: lane 0 takes {0, x[3:0]} x w,
//     lane 1 takes {0, x[7:4]} x w with shift_i[1] = 1; or
//   * two independent 4b x 8b products, one per thread, each shifted by 4
//     when its 4-bit operand is a rounded high nibble.
//
// The structure (two 5b-8b signed multipliers, "<< 4" muxes controlled by
// shift1/shift2) follows the paper's fMUL drawing. This design's choices:
// the long port is 9 bits signed instead of 8, so a lane can also multiply
// an unsigned 8-bit activation by a reduced signed 4-bit weight (weight
// reduction option); the 32-bit accumulation adder the paper draws inside
// the fMUL sits in the PE's second pipeline stage instead; and lane
// products are sign-extended. The output is PROD_W (20) bits because the
// sum of two shifted 4b x 8b products needs 17.
//
// Purely combinational.
module fmul2
  import nbsmt_pkg::*;
(
  input  logic signed [1:0][4:0] a_i,      // short operands
  input  logic signed [1:0][8:0] b_i,      // long operands
  input  logic        [1:0]      shift_i,  // lane product << 4
  output prod_t                  prod_o
);

  logic signed [13:0] p   [2];
  prod_t              lane[2];

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      p[i]    = $signed(a_i[i]) * $signed(b_i[i]);
      lane[i] = shift_i[i] ? (prod_t'(p[i]) <<< 4) : prod_t'(p[i]);
    end
    prod_o = lane[0] + lane[1];
  end

endmodule

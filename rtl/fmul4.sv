// fmul4 -- flexible multiplier of the 4-thread NB-SMT PE.
//
// Four 5b x 5b signed sub-multipliers; lane i's product is shifted left by
// 4*sh_i[i] bits (0, 4 or 8) and the four lane products are summed. With
// suitable operands from the controller the unit performs
//   * one 8b x 8b product (unsigned x signed), decomposed into the nibble
//     products xH*wH<<8 + xH*wL<<4 + xL*wH<<4 + xL*wL;
//   * two independent 4b x 8b products, two lanes per thread; or
//   * four independent 4b x 4b products, one lane per thread, shifted by 4
//     for each operand that is a rounded high nibble.
// Unsigned nibbles enter as {0, nibble}; a weight's high nibble and a
// reduced 4-bit weight enter sign-extended.
//
// The paper gives the 8b x 8b decomposition and the three operating modes
// but not the circuit; four identical signed 5b x 5b lanes with 0/4/8
// shifters are this design's simplest realisation of it.
//
// Purely combinational.
module fmul4
  import nbsmt_pkg::*;
(
  input  logic signed [3:0][4:0] a_i,
  input  logic signed [3:0][4:0] b_i,
  input  logic        [3:0][1:0] sh_i,   // 0: none, 1: <<4, 2: <<8
  output prod_t                  prod_o
);

  logic signed [9:0] p   [4];
  prod_t             lane[4];

  always_comb begin
    prod_o = '0;
    for (int i = 0; i < 4; i++) begin
      p[i] = $signed(a_i[i]) * $signed(b_i[i]);
      unique case (sh_i[i])
        2'd1:    lane[i] = prod_t'(p[i]) <<< 4;
        2'd2:    lane[i] = prod_t'(p[i]) <<< 8;
        default: lane[i] = prod_t'(p[i]);
      endcase
      prod_o = prod_o + lane[i];
    end
  end

endmodule

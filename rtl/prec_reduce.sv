// prec_reduce -- on-the-fly precision reduction of one 8-bit operand (the
// "Q" unit of the NB-SMT processing element).
//
// When several threads collide on one flexible multiplier, each thread may
// only present a 4-bit operand. If the operand already fits in 4 bits, its
// low nibble is passed unchanged and no shift is needed. Otherwise it is
// rounded to the nearest multiple of 16 and its high nibble is passed; the
// multiplier then shifts that product left by 4 (shift_o = 1).
//
//   SIGNED_OP = 0 (activations, unsigned): "fits" means bits [7:4] are zero,
//                 as in the paper's PE algorithm.
//   SIGNED_OP = 1 (weights, two's complement): "fits" means the value lies in
//                 [-8, 7]; the rounded nibble is a signed 4-bit value.
//
// Rounding to the nearest multiple of 16 follows the paper. The tie rule
// (remainder 8 rounds up) and the saturation of 248..255 to nibble 15 (or
// 120..127 to nibble 7 when signed) are this design's choices, because the
// rounded value 256 (128) has no 4-bit representation.
//
// Purely combinational. The low four bits of the rounded sum are dropped by
// design, so a lint tool reports them as unused.
module prec_reduce #(
  parameter bit SIGNED_OP = 1'b0
) (
  input  logic [7:0] val_i,
  output logic [3:0] nib_o,
  output logic       shift_o,
  output logic       lossy_o
);

  logic       fits;
  logic [8:0] rnd;   // val + 8, one extra bit (sign-extended when signed)

  always_comb begin
    if (SIGNED_OP) begin
      fits = (val_i[7:3] == 5'b00000) || (val_i[7:3] == 5'b11111);
      rnd  = {val_i[7], val_i} + 9'd8;           // -120 .. 135
    end else begin
      fits = (val_i[7:4] == 4'b0000);
      rnd  = {1'b0, val_i} + 9'd8;               // 8 .. 263
    end

    if (fits) begin
      nib_o   = val_i[3:0];
      shift_o = 1'b0;
      lossy_o = 1'b0;
    end else begin
      shift_o = 1'b1;
      lossy_o = (val_i[3:0] != 4'b0000);
      if (SIGNED_OP) begin
        // rnd >>> 4 lies in -8 .. 8; only +8 needs saturation.
        nib_o = (!rnd[8] && rnd[7]) ? 4'sd7 : rnd[7:4];
      end else begin
        // rnd >> 4 lies in 1 .. 16; 16 saturates to 15.
        nib_o = rnd[8] ? 4'd15 : rnd[7:4];
      end
    end
  end

endmodule

// pe_ctrl2 -- local precision controller of the 2-thread NB-SMT PE.
//
// Each cycle it looks at both threads' (activation, weight) pairs. A thread
// needs the multiplier when both of its operands are nonzero.
//   * At most one thread active: the active thread (thread 0 when none is)
//     gets the whole 8b x 8b multiplier -- lane 0 multiplies its low
//     activation nibble, lane 1 its high nibble shifted by 4. Exact.
//   * Both threads active (a thread collision): every thread is squeezed
//     into one 4b x 8b lane. With reduce_w_i = 0 the activations are
//     reduced (low nibble if it suffices, otherwise the rounded high nibble
//     and a shift); with reduce_w_i = 1 the weights are reduced the same way
//     and the activation takes the 9-bit port.
// This is the paper's PE algorithm for two threads; the activation variant
// is its default ("S+A") and the weight variant its ResNet-50 option
// ("S+W"). Selecting the variant by a static input is this design's choice.
//
// Purely combinational; stat_o reports the number of active threads, a
// collision, and whether the reduction dropped nonzero bits.
module pe_ctrl2
  import nbsmt_pkg::*;
(
  input  act_t       [1:0]      x_i,
  input  wgt_t       [1:0]      w_i,
  input  logic                  reduce_w_i,
  output logic signed [1:0][4:0] a_o,
  output logic signed [1:0][8:0] b_o,
  output logic       [1:0]      shift_o,
  output ctrl_stat_t            stat_o
);

  logic [1:0]      active;
  logic [1:0][3:0] xn, wn;
  logic [1:0]      xs, ws, xl, wl;

  for (genvar i = 0; i < 2; i++) begin : g_q
    prec_reduce #(.SIGNED_OP(1'b0)) u_qx (
      .val_i(x_i[i]), .nib_o(xn[i]), .shift_o(xs[i]), .lossy_o(xl[i]));
    prec_reduce #(.SIGNED_OP(1'b1)) u_qw (
      .val_i(w_i[i]), .nib_o(wn[i]), .shift_o(ws[i]), .lossy_o(wl[i]));
    assign active[i] = (x_i[i] != '0) && (w_i[i] != '0);
  end

  logic sel;   // GetActiveThread
  assign sel = active[1] && !active[0];

  always_comb begin
    stat_o.n_active  = 3'(active[0]) + 3'(active[1]);
    stat_o.collision = &active;
    stat_o.lossy     = 1'b0;
    if (&active) begin
      for (int i = 0; i < 2; i++) begin
        if (reduce_w_i) begin
          a_o[i]     = {wn[i][3], wn[i]};           // signed 4-bit weight
          b_o[i]     = {1'b0, x_i[i]};              // unsigned activation
          shift_o[i] = ws[i];
        end else begin
          a_o[i]     = {1'b0, xn[i]};               // unsigned 4-bit activation
          b_o[i]     = {w_i[i][7], w_i[i]};         // signed weight
          shift_o[i] = xs[i];
        end
      end
      stat_o.lossy = reduce_w_i ? |wl : |xl;
    end else begin
      a_o[0]  = {1'b0, x_i[sel][3:0]};
      a_o[1]  = {1'b0, x_i[sel][7:4]};
      b_o[0]  = {w_i[sel][7], w_i[sel]};
      b_o[1]  = {w_i[sel][7], w_i[sel]};
      shift_o = 2'b10;
    end
  end

endmodule

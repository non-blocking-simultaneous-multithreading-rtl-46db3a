// pe_ctrl4 -- local precision controller of the 4-thread NB-SMT PE.
//
// A thread is active when its activation and weight are both nonzero.
// Depending on how many threads are active in a cycle, it prepares the four
// lanes of fmul4 (operands a/b as 5-bit signed values, shift 0/1/2 nibbles):
//   * 0 or 1 active: the active thread (thread 0 when none) gets the whole
//     8b x 8b multiplier, split into its four nibble products. Exact.
//   * 2 active: handled as in the 2-thread PE. The lower-numbered active
//     thread takes lanes 0-1, the other lanes 2-3; each performs a 4b x 8b
//     product whose activation (reduce_w_i = 0) or weight (reduce_w_i = 1)
//     is reduced to a nibble, the 8-bit operand being split over its lanes.
//   * 3 or 4 active: every active thread i takes lane i with both operands
//     reduced to nibbles; the lane shifts by 4 for each rounded high nibble.
// The three cases and the all-operands reduction for 3 and 4 colliding
// threads follow the paper. Lane assignment, the priority pick of the two
// active threads, and the weight-reduction input are this design's choices.
//
// Purely combinational.
module pe_ctrl4
  import nbsmt_pkg::*;
(
  input  act_t       [3:0]       x_i,
  input  wgt_t       [3:0]       w_i,
  input  logic                   reduce_w_i,
  output logic signed [3:0][4:0] a_o,
  output logic signed [3:0][4:0] b_o,
  output logic       [3:0][1:0]  sh_o,
  output ctrl_stat_t             stat_o
);

  logic [3:0]      active;
  logic [3:0][3:0] xn, wn;
  logic [3:0]      xs, ws, xl, wl;

  for (genvar i = 0; i < 4; i++) begin : g_q
    prec_reduce #(.SIGNED_OP(1'b0)) u_qx (
      .val_i(x_i[i]), .nib_o(xn[i]), .shift_o(xs[i]), .lossy_o(xl[i]));
    prec_reduce #(.SIGNED_OP(1'b1)) u_qw (
      .val_i(w_i[i]), .nib_o(wn[i]), .shift_o(ws[i]), .lossy_o(wl[i]));
    assign active[i] = (x_i[i] != '0) && (w_i[i] != '0);
  end

  logic [2:0] n_act;
  logic [1:0] t_lo, t_hi;   // lowest and highest active thread

  always_comb begin
    n_act = '0;
    t_lo  = '0;
    t_hi  = '0;
    for (int i = 3; i >= 0; i--) if (active[i]) t_lo = 2'(i);
    for (int i = 0; i < 4; i++) begin
      n_act = n_act + 3'(active[i]);
      if (active[i]) t_hi = 2'(i);
    end
  end

  always_comb begin
    a_o  = '0;
    b_o  = '0;
    sh_o = '0;
    stat_o.n_active  = n_act;
    stat_o.collision = (n_act > 3'd1);
    stat_o.lossy     = 1'b0;

    if (n_act <= 3'd1) begin
      // t_lo is the active thread, or 0 when none is active.
      a_o[0] = {1'b0, x_i[t_lo][3:0]};  b_o[0] = {1'b0, w_i[t_lo][3:0]};         sh_o[0] = 2'd0;
      a_o[1] = {1'b0, x_i[t_lo][7:4]};  b_o[1] = {1'b0, w_i[t_lo][3:0]};         sh_o[1] = 2'd1;
      a_o[2] = {1'b0, x_i[t_lo][3:0]};  b_o[2] = {w_i[t_lo][7], w_i[t_lo][7:4]}; sh_o[2] = 2'd1;
      a_o[3] = {1'b0, x_i[t_lo][7:4]};  b_o[3] = {w_i[t_lo][7], w_i[t_lo][7:4]}; sh_o[3] = 2'd2;
    end else if (n_act == 3'd2) begin
      for (int k = 0; k < 2; k++) begin
        automatic logic [1:0] t = (k == 0) ? t_lo : t_hi;
        if (reduce_w_i) begin
          a_o[2*k]   = {1'b0, x_i[t][3:0]};  b_o[2*k]   = {wn[t][3], wn[t]};  sh_o[2*k]   = {1'b0, ws[t]};
          a_o[2*k+1] = {1'b0, x_i[t][7:4]};  b_o[2*k+1] = {wn[t][3], wn[t]};  sh_o[2*k+1] = {ws[t], !ws[t]};
        end else begin
          a_o[2*k]   = {1'b0, xn[t]};  b_o[2*k]   = {1'b0, w_i[t][3:0]};         sh_o[2*k]   = {1'b0, xs[t]};
          a_o[2*k+1] = {1'b0, xn[t]};  b_o[2*k+1] = {w_i[t][7], w_i[t][7:4]};    sh_o[2*k+1] = {xs[t], !xs[t]};
        end
      end
      stat_o.lossy = reduce_w_i ? (wl[t_lo] | wl[t_hi]) : (xl[t_lo] | xl[t_hi]);
    end else begin
      for (int i = 0; i < 4; i++) begin
        if (active[i]) begin
          a_o[i]  = {1'b0, xn[i]};
          b_o[i]  = {wn[i][3], wn[i]};
          sh_o[i] = 2'(xs[i]) + 2'(ws[i]);
          stat_o.lossy = stat_o.lossy | xl[i] | wl[i];
        end
      end
    end
  end

endmodule

// sysmt_core -- NB-SMT output-stationary systolic array core (SySMT).
//
// Computes O = X * W for an activation tile X (ROWS x K, unsigned 8-bit)
// and a weight tile W (K x COLS, signed 8-bit). The K dimension is split
// into THREADS equal slices, one per thread; thread t of every row and
// column carries elements [t*K/T, (t+1)*K/T). Each cycle one step k of all
// threads enters the core, so a tile takes K/THREADS input cycles instead of
// K: a fixed 2x (or 4x) speedup. When several threads of a PE need its
// multiplier in the same cycle the PE reduces their precision to 4 bits
// instead of stalling ("non-blocking"), so the result can differ slightly
// from the exact product; sparse and narrow data make it exact.
//
// Structure: a skew_buffer delays row r of the activations (with the
// valid/first flags) by r cycles and column c of the weights by c cycles;
// a ROWS x COLS pe_array does the rest.
//
// Interface (all inputs sampled on the rising edge of clk):
//   x_i[r][t]   activation of row r, thread t, for the current step
//   w_i[c][t]   weight of column c, thread t, for the current step
//   beat_i      valid: this step belongs to a tile; first: step 0 of a tile
//   reduce_w_i  0: reduce activations on collisions (default), 1: weights
//   psum_o      the output tile, one 32-bit accumulator per PE
//   stat_o      per-PE controller status of the beat it just multiplied
// Timing: if step k of a tile is presented before edge n, PE (r, c) has
// added it to psum_o[r][c] after edge n + r + c + 1. A new tile may follow
// the previous one with no gap; psum_o[r][c] then holds the old result
// until the new tile's first step reaches that PE.
//
// Array size 16 x 16 and the 2- and 4-thread variants follow the paper;
// tile framing and the skew buffers are this design's choices.
module sysmt_core
  import nbsmt_pkg::*;
#(
  parameter int unsigned ROWS    = 16,
  parameter int unsigned COLS    = 16,
  parameter int unsigned THREADS = 2
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                reduce_w_i,
  input  act_t       [ROWS-1:0][THREADS-1:0]  x_i,
  input  wgt_t       [COLS-1:0][THREADS-1:0]  w_i,
  input  beat_t                               beat_i,
  output acc_t       [ROWS-1:0][COLS-1:0]     psum_o,
  output ctrl_stat_t [ROWS-1:0][COLS-1:0]     stat_o
);

  localparam int unsigned XW = THREADS * $bits(act_t) + $bits(beat_t);
  localparam int unsigned WW = THREADS * $bits(wgt_t);

  logic  [ROWS-1:0][XW-1:0] xs_in, xs_out;
  logic  [COLS-1:0][WW-1:0] ws_in, ws_out;
  act_t  [ROWS-1:0][THREADS-1:0] x_sk;
  beat_t [ROWS-1:0]              b_sk;
  wgt_t  [COLS-1:0][THREADS-1:0] w_sk;

  for (genvar r = 0; r < ROWS; r++) begin : g_xr
    assign xs_in[r]           = {beat_i, x_i[r]};
    assign {b_sk[r], x_sk[r]} = xs_out[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_wc
    assign ws_in[c] = w_i[c];
    assign w_sk[c]  = ws_out[c];
  end

  skew_buffer #(.LANES(ROWS), .W(XW)) u_skew_x (
    .clk, .rst_n, .d_i(xs_in), .d_o(xs_out));
  skew_buffer #(.LANES(COLS), .W(WW)) u_skew_w (
    .clk, .rst_n, .d_i(ws_in), .d_o(ws_out));

  pe_array #(.ROWS(ROWS), .COLS(COLS), .THREADS(THREADS)) u_array (
    .clk, .rst_n, .reduce_w_i,
    .x_i(x_sk), .beat_i(b_sk), .w_i(w_sk),
    .psum_o, .stat_o
  );

endmodule

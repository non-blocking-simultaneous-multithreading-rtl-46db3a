// pe_array -- ROWS x COLS grid of NB-SMT processing elements.
//
// Activations (all threads, with the valid/first flags) enter the left
// column, one row per array row, and move one PE to the right per cycle.
// Weights (all threads) enter the top row, one per array column, and move one
// PE down per cycle. Each link is THREADS operands wide: the grid is that of
// a conventional output-stationary array with its connectivity multiplied by
// the number of threads, as the paper describes. Inputs must already be
// skewed (row r and column c delayed by r and c cycles; see skew_buffer).
//
// Outputs: every PE's psum and its per-beat controller status. The
// activations leaving the right edge and the weights leaving the bottom edge
// are not used; a lint tool reports the weight row below the array as unused.
module pe_array
  import nbsmt_pkg::*;
#(
  parameter int unsigned ROWS    = 16,
  parameter int unsigned COLS    = 16,
  parameter int unsigned THREADS = 2
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  input  logic                                     reduce_w_i,
  input  act_t       [ROWS-1:0][THREADS-1:0]       x_i,
  input  beat_t      [ROWS-1:0]                    beat_i,
  input  wgt_t       [COLS-1:0][THREADS-1:0]       w_i,
  output acc_t       [ROWS-1:0][COLS-1:0]          psum_o,
  output ctrl_stat_t [ROWS-1:0][COLS-1:0]          stat_o
);

  // Horizontal links: column index c is the input of PE (r, c).
  act_t  [ROWS-1:0][COLS:0][THREADS-1:0] xh;
  beat_t [ROWS-1:0][COLS:0]              bh;
  // Vertical links: row index r is the input of PE (r, c).
  wgt_t  [ROWS:0][COLS-1:0][THREADS-1:0] wv;

  for (genvar r = 0; r < ROWS; r++) begin : g_left
    assign xh[r][0] = x_i[r];
    assign bh[r][0] = beat_i[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign wv[0][c] = w_i[c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe #(.THREADS(THREADS)) u_pe (
        .clk, .rst_n, .reduce_w_i,
        .x_i(xh[r][c]), .w_i(wv[r][c]), .beat_i(bh[r][c]),
        .x_o(xh[r][c+1]), .w_o(wv[r+1][c]), .beat_o(bh[r][c+1]),
        .psum_o(psum_o[r][c]), .stat_o(stat_o[r][c])
      );
    end
  end

endmodule

// pe -- NB-SMT processing element of the output-stationary systolic array.
//
// Every cycle the PE takes one (activation, weight) pair per thread from its
// left and upper neighbours and forwards them, registered, to its right and
// lower neighbours, whatever their values -- the array never stalls. The
// threads share one multiplier and one 32-bit partial-sum register: all
// threads work on slices of the same dot product, so their products are
// simply added into the same output.
//
// Two pipeline stages, as in the paper:
//   stage 1  precision controller + flexible multiplier -> product register
//   stage 2  psum <= first ? product : psum + product   (when valid)
// THREADS = 2 uses pe_ctrl2 + fmul2 (the paper's drawn PE); THREADS = 4 uses
// pe_ctrl4 + fmul4. The valid/first flags that frame a tile travel with the
// activations (beat_i -> beat_o); they and the synchronous active-low reset
// are this design's choices, the paper not describing tile framing.
//
// Timing: a beat presented at x_i/w_i/beat_i before clock edge n appears on
// x_o/w_o/beat_o after edge n and is included in psum_o after edge n+1.
// stat_o reports, registered with the product, what the controller did for
// that beat (zero when the beat was not valid).
module pe
  import nbsmt_pkg::*;
#(
  parameter int unsigned THREADS = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      reduce_w_i,
  input  act_t       [THREADS-1:0]  x_i,
  input  wgt_t       [THREADS-1:0]  w_i,
  input  beat_t                     beat_i,
  output act_t       [THREADS-1:0]  x_o,
  output wgt_t       [THREADS-1:0]  w_o,
  output beat_t                     beat_o,
  output acc_t                      psum_o,
  output ctrl_stat_t                stat_o
);

  prod_t      prod;
  ctrl_stat_t stat;

  if (THREADS == 2) begin : g_2t
    logic signed [1:0][4:0] a;
    logic signed [1:0][8:0] b;
    logic        [1:0]      s;
    pe_ctrl2 u_ctrl (.x_i, .w_i, .reduce_w_i, .a_o(a), .b_o(b), .shift_o(s), .stat_o(stat));
    fmul2    u_fmul (.a_i(a), .b_i(b), .shift_i(s), .prod_o(prod));
  end else if (THREADS == 4) begin : g_4t
    logic signed [3:0][4:0] a;
    logic signed [3:0][4:0] b;
    logic        [3:0][1:0] s;
    pe_ctrl4 u_ctrl (.x_i, .w_i, .reduce_w_i, .a_o(a), .b_o(b), .sh_o(s), .stat_o(stat));
    fmul4    u_fmul (.a_i(a), .b_i(b), .sh_i(s), .prod_o(prod));
  end else begin : g_bad
    $error("pe: THREADS must be 2 or 4");
  end

  // Forwarding registers: one activation and one weight register per thread.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x_o    <= '0;
      w_o    <= '0;
      beat_o <= '0;
    end else begin
      x_o    <= x_i;
      w_o    <= w_i;
      beat_o <= beat_i;
    end
  end

  // Stage 1: multiply.
  prod_t prod_q;
  beat_t beat_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prod_q <= '0;
      beat_q <= '0;
      stat_o <= '0;
    end else begin
      prod_q <= prod;
      beat_q <= beat_i;
      stat_o <= beat_i.valid ? stat : '0;
    end
  end

  // Stage 2: accumulate into the output-stationary psum.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      psum_o <= '0;
    end else if (beat_q.valid) begin
      psum_o <= beat_q.first ? acc_t'(prod_q) : psum_o + acc_t'(prod_q);
    end
  end

endmodule

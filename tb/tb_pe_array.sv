// tb_pe_array -- checks a 3x4 2-thread PE grid fed with skewed data.
//
// The testbench does the skewing itself: at cycle n, row r receives step
// n - r of its activations and column c step n - c of its weights (zero and
// not valid outside the tile). For several tiles of random length and
// sparsity it checks, once the array has drained, every psum against the
// matrix product computed with the reference PE model, and that the
// activations of a PE's thread reach the next column while its weights
// reach the next row (outputs differ per position, so a swapped or missing
// link shows up).
module tb_pe_array;
  import nbsmt_pkg::*;
  import nbsmt_ref_pkg::*;
  localparam int R = 3, C = 4, T = 2, MAXL = 10;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, rw = 0;
  always #5 clk = ~clk;
  act_t  [R-1:0][T-1:0] x;
  beat_t [R-1:0]        b;
  wgt_t  [C-1:0][T-1:0] w;
  acc_t  [R-1:0][C-1:0] p;
  ctrl_stat_t [R-1:0][C-1:0] st;

  pe_array #(.ROWS(R), .COLS(C), .THREADS(T)) dut (
    .clk, .rst_n, .reduce_w_i(rw), .x_i(x), .beat_i(b), .w_i(w), .psum_o(p), .stat_o(st));

  int xm[R][MAXL][T], wm[C][MAXL][T];

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int L, k, e;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int tile = 0; tile < 20; tile++) begin
      rw = (tile % 4 == 3);
      L = int'($urandom_range(1, MAXL));
      for (int s = 0; s < L; s++)
        for (int t = 0; t < T; t++) begin
          for (int r = 0; r < R; r++)
            xm[r][s][t] = ($urandom_range(0, 2) == 0) ? 0 : int'($urandom_range(0, (tile % 2 != 0) ? 15 : 255));
          for (int c = 0; c < C; c++) wm[c][s][t] = int'($urandom_range(0, 255)) - 128;
        end
      for (int n = 0; n < L + R + C; n++) begin
        for (int r = 0; r < R; r++) begin
          k = n - r;
          b[r].valid = (k >= 0 && k < L);
          b[r].first = (k == 0);
          for (int t = 0; t < T; t++) x[r][t] = b[r].valid ? 8'(xm[r][k][t]) : 8'd0;
        end
        for (int c = 0; c < C; c++) begin
          k = n - c;
          for (int t = 0; t < T; t++) w[c][t] = (k >= 0 && k < L) ? 8'(wm[c][k][t]) : 8'd0;
        end
        @(posedge clk);
        #1;
      end
      x = '0; w = '0; b = '0;
      repeat (3) @(posedge clk);
      #1;
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          e = 0;
          for (int s = 0; s < L; s++) e += pe2(xm[r][s][0], wm[c][s][0], xm[r][s][1], wm[c][s][1], rw);
          checks++;
          if (int'(p[r][c]) != e) begin
            failures++;
            $display("FAIL tile %0d PE(%0d,%0d): %0d exp %0d", tile, r, c, p[r][c], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

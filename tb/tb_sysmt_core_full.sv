// tb_sysmt_core_full -- the NB-SMT core at its full default size
// (16 x 16 PEs, 2 threads), taken through a series of complete tiles by
// core_checker: every psum of every tile is checked at its exact
// completion cycle, and every 2-thread mechanism must occur.
module tb_sysmt_core_full;
  import nbsmt_pkg::*;
  localparam int R = 16, C = 16, T = 2;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, rw, done;
  act_t [R-1:0][T-1:0] x;  wgt_t [C-1:0][T-1:0] w;  beat_t b;
  acc_t [R-1:0][C-1:0] p;  ctrl_stat_t [R-1:0][C-1:0] s;

  sysmt_core dut (
    .clk, .rst_n, .reduce_w_i(rw), .x_i(x), .w_i(w), .beat_i(b), .psum_o(p), .stat_o(s));
  core_checker #(.ROWS(R), .COLS(C), .THREADS(T), .TILES(24), .MAX_L(32)) chk (
    .clk, .rst_n, .reduce_w_o(rw), .x_o(x), .w_o(w), .beat_o(b), .psum_i(p), .stat_i(s),
    .done_o(done));

  initial begin
    #10000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk.n_chk, chk.n_fail + 1);
    $finish;
  end

  initial begin
    @(posedge clk iff done);
    $display("TB_RESULT checks=%0d failures=%0d", chk.n_chk, chk.n_fail);
    $finish;
  end
endmodule

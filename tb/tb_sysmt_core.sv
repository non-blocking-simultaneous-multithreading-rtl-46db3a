// tb_sysmt_core -- end-to-end test of the NB-SMT core.
//
// Two reduced-size cores, a 2-thread 4x5 and a 4-thread 3x4 array, each
// driven by a core_checker that streams a series of tiles covering every
// mechanism (precision reduction, error-free collisions, sparsity, weight
// reduction, 2-thread operation of the 4-thread core, back-to-back tiles)
// and checks every output at its exact completion cycle.
module tb_sysmt_core;
  import nbsmt_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  localparam int R2 = 4, C2 = 5, R4 = 3, C4 = 4;

  logic rst2, rw2, done2;
  act_t [R2-1:0][1:0] x2;  wgt_t [C2-1:0][1:0] w2;  beat_t b2;
  acc_t [R2-1:0][C2-1:0] p2;  ctrl_stat_t [R2-1:0][C2-1:0] s2;

  logic rst4, rw4, done4;
  act_t [R4-1:0][3:0] x4;  wgt_t [C4-1:0][3:0] w4;  beat_t b4;
  acc_t [R4-1:0][C4-1:0] p4;  ctrl_stat_t [R4-1:0][C4-1:0] s4;

  sysmt_core #(.ROWS(R2), .COLS(C2), .THREADS(2)) dut2 (
    .clk, .rst_n(rst2), .reduce_w_i(rw2), .x_i(x2), .w_i(w2), .beat_i(b2), .psum_o(p2), .stat_o(s2));
  core_checker #(.ROWS(R2), .COLS(C2), .THREADS(2), .TILES(24)) chk2 (
    .clk, .rst_n(rst2), .reduce_w_o(rw2), .x_o(x2), .w_o(w2), .beat_o(b2), .psum_i(p2), .stat_i(s2),
    .done_o(done2));

  sysmt_core #(.ROWS(R4), .COLS(C4), .THREADS(4)) dut4 (
    .clk, .rst_n(rst4), .reduce_w_i(rw4), .x_i(x4), .w_i(w4), .beat_i(b4), .psum_o(p4), .stat_o(s4));
  core_checker #(.ROWS(R4), .COLS(C4), .THREADS(4), .TILES(24)) chk4 (
    .clk, .rst_n(rst4), .reduce_w_o(rw4), .x_o(x4), .w_o(w4), .beat_o(b4), .psum_i(p4), .stat_i(s4),
    .done_o(done4));

  initial begin
    #10000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk2.n_chk + chk4.n_chk, chk2.n_fail + chk4.n_fail + 1);
    $finish;
  end

  initial begin
    @(posedge clk iff (done2 && done4));
    $display("TB_RESULT checks=%0d failures=%0d", chk2.n_chk + chk4.n_chk, chk2.n_fail + chk4.n_fail);
    $finish;
  end
endmodule

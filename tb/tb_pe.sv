// tb_pe -- cycle-accurate check of the NB-SMT processing element.
//
// A 2-thread and a 4-thread PE receive the same kind of random beat stream:
// tiles of random length framed by valid/first, idle cycles in between,
// operands drawn from zero, 4-bit and 8-bit values. Every cycle the
// testbench checks that the forwarding registers show last cycle's inputs,
// and that psum_o equals a model that adds the reference product of a beat
// exactly two edges after the beat was presented (stage 1 + stage 2) and
// restarts on 'first'. Both collision policies are exercised.
module tb_pe;
  import nbsmt_pkg::*;
  import nbsmt_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, rw = 0;
  always #5 clk = ~clk;

  act_t [1:0] x2, x2o;  wgt_t [1:0] w2, w2o;
  act_t [3:0] x4, x4o;  wgt_t [3:0] w4, w4o;
  beat_t bt, b2o, b4o;
  acc_t  p2, p4;
  ctrl_stat_t s2, s4;

  pe #(.THREADS(2)) dut2 (.clk, .rst_n, .reduce_w_i(rw), .x_i(x2), .w_i(w2), .beat_i(bt),
                          .x_o(x2o), .w_o(w2o), .beat_o(b2o), .psum_o(p2), .stat_o(s2));
  pe #(.THREADS(4)) dut4 (.clk, .rst_n, .reduce_w_i(rw), .x_i(x4), .w_i(w4), .beat_i(bt),
                          .x_o(x4o), .w_o(w4o), .beat_o(b4o), .psum_o(p4), .stat_o(s4));

  function automatic int rnd_x();
    case ($urandom_range(0, 2))
      0: return 0;
      1: return int'($urandom_range(1, 15));
      default: return int'($urandom_range(16, 255));
    endcase
  endfunction
  function automatic int rnd_w();
    case ($urandom_range(0, 2))
      0: return 0;
      1: return int'($urandom_range(0, 15)) - 8;
      default: return int'($urandom_range(0, 255)) - 128;
    endcase
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Model state: product and flags of the beat in stage 1, and the psums.
    int    prod2_q, prod4_q, psum2, psum4, xa[4], wa[4];
    beat_t bq;
    int    left, ncoll2, ncoll4_3;
    x2 = '0; w2 = '0; x4 = '0; w4 = '0; bt = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    prod2_q = 0; prod4_q = 0; psum2 = 0; psum4 = 0; bq = '0; left = 0; ncoll2 = 0; ncoll4_3 = 0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      // Drive the next beat: a new tile, the next beat of a tile, or idle.
      bt = '0;
      for (int i = 0; i < 4; i++) begin xa[i] = 0; wa[i] = 0; end
      if (left == 0 && $urandom_range(0, 3) != 0) begin
        left = int'($urandom_range(1, 12));
        bt.first = 1'b1;
      end
      if (left > 0) begin
        bt.valid = 1'b1;
        for (int i = 0; i < 4; i++) begin xa[i] = rnd_x(); wa[i] = rnd_w(); end
        left--;
      end
      if (cyc % 500 == 250) rw = ~rw;
      for (int i = 0; i < 2; i++) begin x2[i] = 8'(xa[i]); w2[i] = 8'(wa[i]); end
      for (int i = 0; i < 4; i++) begin x4[i] = 8'(xa[i]); w4[i] = 8'(wa[i]); end
      if (n_active('{xa[0], xa[1]}, '{wa[0], wa[1]}) == 2) ncoll2++;
      if (n_active(xa, wa) >= 3) ncoll4_3++;
      @(posedge clk);
      // Model the two edges: stage 2 uses last stage-1 contents.
      if (bq.valid) begin
        psum2 = bq.first ? prod2_q : psum2 + prod2_q;
        psum4 = bq.first ? prod4_q : psum4 + prod4_q;
      end
      bq      = bt;
      prod2_q = pe2(xa[0], wa[0], xa[1], wa[1], rw);
      prod4_q = pe4(xa, wa, rw);
      #1;
      check(x2o == x2 && w2o == w2 && b2o == bt, "2T forwarding registers");
      check(x4o == x4 && w4o == w4 && b4o == bt, "4T forwarding registers");
      check(int'(p2) == psum2, $sformatf("2T psum %0d exp %0d", p2, psum2));
      check(int'(p4) == psum4, $sformatf("4T psum %0d exp %0d", p4, psum4));
      check(s2.collision == (bt.valid && n_active('{xa[0], xa[1]}, '{wa[0], wa[1]}) == 2), "2T status");
    end
    check(ncoll2 > 0 && ncoll4_3 > 0, "collisions exercised");
    $display("2T collisions %0d, 4T 3+-way collisions %0d", ncoll2, ncoll4_3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_pe_ctrl2 -- checks the 2-thread precision controller.
//
// For random thread pairs drawn from a mix of zero, 4-bit and 8-bit values,
// the product the controller's fmul2 operands represent
// (a0*b0*16^s0 + a1*b1*16^s1) is compared with the reference model, with
// activation and with weight reduction. The status outputs are checked too,
// and the paper's squeeze examples (precision reduction, 8-bit sparsity,
// 4-bit sparsity, mixed) are applied explicitly.
module tb_pe_ctrl2;
  import nbsmt_pkg::*;
  import nbsmt_ref_pkg::*;

  int checks = 0, failures = 0;
  act_t [1:0] x;
  wgt_t [1:0] w;
  logic       rw;
  logic signed [1:0][4:0] a;
  logic signed [1:0][8:0] b;
  logic        [1:0]      s;
  ctrl_stat_t             st;

  pe_ctrl2 dut (.x_i(x), .w_i(w), .reduce_w_i(rw), .a_o(a), .b_o(b), .shift_o(s), .stat_o(st));

  function automatic int rnd_x();
    case ($urandom_range(0, 2))
      0: return 0;
      1: return int'($urandom_range(1, 15));
      default: return int'($urandom_range(16, 255));
    endcase
  endfunction

  function automatic int rnd_w();
    case ($urandom_range(0, 3))
      0: return 0;
      1: return int'($urandom_range(0, 15)) - 8;
      default: return int'($urandom_range(0, 255)) - 128;
    endcase
  endfunction

  task automatic apply(int x0, int w0, int x1, int w1, bit r);
    int got, exp, na;
    bit lossy;
    x = {8'(x1), 8'(x0)};
    w = {8'(w1), 8'(w0)};
    rw = r;
    #1;
    got = 0;
    for (int i = 0; i < 2; i++) got += int'($signed(a[i])) * int'($signed(b[i])) * (s[i] ? 16 : 1);
    exp = pe2(x0, w0, x1, w1, r);
    na  = int'(x0 != 0 && w0 != 0) + int'(x1 != 0 && w1 != 0);
    lossy = (na == 2) && (r ? (qw(w0) != w0 || qw(w1) != w1) : (qa(x0) != x0 || qa(x1) != x1));
    checks++;
    if (got != exp || int'(st.n_active) != na || st.collision != (na == 2) || st.lossy != lossy) begin
      failures++;
      $display("FAIL (%0d,%0d)(%0d,%0d) rw=%0d: prod %0d exp %0d, stat n=%0d c=%0d l=%0d",
               x0, w0, x1, w1, r, got, exp, st.n_active, st.collision, st.lossy);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Paper examples (weights kept in the signed range).
    apply(46, 23, 178, 100, 0);       // both reduced: 3<<4 * 23 + 11<<4 * 100
    checks++; if (int'(st.n_active) != 2 || !st.lossy) failures++;
    apply(0, 23, 178, -14, 0);        // 8-bit sparsity: exact 8b x 8b
    checks++; if (s != 2'b10 || int'($signed(a[1])) != 11 || int'($signed(a[0])) != 2) failures++;
    apply(14, 23, 2, -14, 0);         // 4-bit sparsity: both LSBs, no shift
    checks++; if (s != 2'b00 || st.lossy) failures++;
    apply(224, 23, 2, -14, 0);        // 1110_0000: MSBs exact, shifted
    checks++; if (s != 2'b01 || st.lossy) failures++;
    apply(23, 14, 2, 100, 1);         // weight reduction
    for (int n = 0; n < 20000; n++)
      apply(rnd_x(), rnd_w(), rnd_x(), rnd_w(), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

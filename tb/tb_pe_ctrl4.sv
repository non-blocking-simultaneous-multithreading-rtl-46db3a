// tb_pe_ctrl4 -- checks the 4-thread precision controller.
//
// Random sets of four (activation, weight) pairs with a controlled number
// of active threads are applied; the product the fmul4 operands represent
// (sum of a*b*16^sh) is compared with the reference model, which gives the
// single active thread an exact product, squeezes two active threads as in
// the 2-thread PE and reduces both operands of every thread when three or
// four collide. Status outputs are checked as well.
module tb_pe_ctrl4;
  import nbsmt_pkg::*;
  import nbsmt_ref_pkg::*;

  int checks = 0, failures = 0;
  act_t [3:0] x;
  wgt_t [3:0] w;
  logic       rw;
  logic signed [3:0][4:0] a, b;
  logic        [3:0][1:0] sh;
  ctrl_stat_t             st;
  int hist[5];

  pe_ctrl4 dut (.x_i(x), .w_i(w), .reduce_w_i(rw), .a_o(a), .b_o(b), .sh_o(sh), .stat_o(st));

  function automatic int rnd_x();
    return ($urandom_range(0, 1) == 0) ? int'($urandom_range(1, 15)) : int'($urandom_range(16, 255));
  endfunction
  function automatic int rnd_w();
    int v;
    do v = ($urandom_range(0, 1) == 0) ? int'($urandom_range(0, 15)) - 8
                                       : int'($urandom_range(0, 255)) - 128;
    while (v == 0);
    return v;
  endfunction

  task automatic apply(int xs[4], int ws[4], bit r);
    int got, exp, na;
    for (int i = 0; i < 4; i++) begin x[i] = 8'(xs[i]); w[i] = 8'(ws[i]); end
    rw = r;
    #1;
    got = 0;
    for (int i = 0; i < 4; i++) got += int'($signed(a[i])) * int'($signed(b[i])) * (1 << (4 * sh[i]));
    exp = pe4(xs, ws, r);
    na = 0;
    for (int i = 0; i < 4; i++) if (xs[i] != 0 && ws[i] != 0) na++;
    hist[na]++;
    checks++;
    if (got != exp || int'(st.n_active) != na || st.collision != (na > 1)) begin
      failures++;
      $display("FAIL x=%p w=%p rw=%0d: prod %0d exp %0d n=%0d", xs, ws, r, got, exp, st.n_active);
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
    int xs[4], ws[4];
    for (int n = 0; n < 20000; n++) begin
      for (int i = 0; i < 4; i++) begin
        xs[i] = rnd_x();
        ws[i] = rnd_w();
        // Idle a thread by zeroing one of its operands, with probability ~45%.
        case ($urandom_range(0, 8))
          0, 1: xs[i] = 0;
          2, 3: ws[i] = 0;
          default: ;
        endcase
      end
      apply(xs, ws, 1'($urandom));
    end
    // Every activity count must have been exercised.
    for (int k = 0; k <= 4; k++) begin
      checks++;
      if (hist[k] == 0) begin failures++; $display("FAIL no case with %0d active", k); end
    end
    $display("active-thread histogram: %p", hist);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

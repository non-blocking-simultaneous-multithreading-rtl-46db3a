// tb_fmul2 -- checks the 2-lane flexible multiplier.
//
// Random operands on both lanes with random shifts are compared with
// a0*b0*2^(4*s0) + a1*b1*2^(4*s1). The 8b x 8b use (low/high activation
// nibble against the same weight) is checked against x*w, and the paper's
// worked example (14<<4 x 23 + 2 x 242 = 5636) is reproduced.
module tb_fmul2;
  import nbsmt_pkg::*;

  int checks = 0, failures = 0;
  logic signed [1:0][4:0] a;
  logic signed [1:0][8:0] b;
  logic        [1:0]      s;
  prod_t                  p;

  fmul2 dut (.a_i(a), .b_i(b), .shift_i(s), .prod_o(p));

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
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
    int e, x, w;
    for (int n = 0; n < 2000; n++) begin
      a = {5'($urandom), 5'($urandom)};
      b = {9'($urandom), 9'($urandom)};
      s = 2'($urandom);
      #1;
      e = 0;
      for (int i = 0; i < 2; i++) e += int'($signed(a[i])) * int'($signed(b[i])) * (s[i] ? 16 : 1);
      check(int'(p), e, "random lanes");
    end
    for (int n = 0; n < 2000; n++) begin
      x = int'($urandom_range(0, 255));
      w = int'($urandom_range(0, 255)) - 128;
      a = {5'(x >> 4), 5'(x & 15)};
      b = {9'(w), 9'(w)};
      s = 2'b10;
      #1;
      check(int'(p), x * w, "8b x 8b");
    end
    // Worked example: thread 1 uses the rounded MSBs 1110 of 1110_0000.
    a = {5'd2, 5'd14};
    b = {9'd242, 9'd23};
    s = 2'b01;
    #1;
    check(int'(p), 5636, "paper example");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

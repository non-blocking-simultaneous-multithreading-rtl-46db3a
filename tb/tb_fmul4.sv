// tb_fmul4 -- checks the 4-lane flexible multiplier.
//
// Random 5-bit signed operands and shifts (0, 4, 8) are compared with the
// sum of shifted lane products; the 8b x 8b nibble decomposition is checked
// against x*w over random pairs and the extreme corners.
module tb_fmul4;
  import nbsmt_pkg::*;

  int checks = 0, failures = 0;
  logic signed [3:0][4:0] a, b;
  logic        [3:0][1:0] sh;
  prod_t                  p;

  fmul4 dut (.a_i(a), .b_i(b), .sh_i(sh), .prod_o(p));

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic full(int x, int w);
    logic [7:0] wb = 8'(w);
    a  = {5'(x >> 4), 5'(x & 15), 5'(x >> 4), 5'(x & 15)};
    b  = {{wb[7], wb[7:4]}, {wb[7], wb[7:4]}, {1'b0, wb[3:0]}, {1'b0, wb[3:0]}};
    sh = {2'd2, 2'd1, 2'd1, 2'd0};
    #1;
    check(int'(p), x * w, $sformatf("8b x 8b %0d*%0d", x, w));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 4; i++) begin
        a[i]  = 5'($urandom);
        b[i]  = 5'($urandom);
        sh[i] = 2'($urandom_range(0, 2));
      end
      #1;
      e = 0;
      for (int i = 0; i < 4; i++) e += int'($signed(a[i])) * int'($signed(b[i])) * (1 << (4 * sh[i]));
      check(int'(p), e, "random lanes");
    end
    for (int n = 0; n < 2000; n++)
      full(int'($urandom_range(0, 255)), int'($urandom_range(0, 255)) - 128);
    full(255, -128);
    full(255, 127);
    full(0, -128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

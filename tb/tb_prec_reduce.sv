// tb_prec_reduce -- exhaustive check of the precision-reduction unit.
//
// Applies all 256 operand values to an unsigned (activation) and a signed
// (weight) instance and compares the value they represent (nibble, shifted
// by 4 when shift_o is set) and the lossy flag with the reference model.
// Also checks the paper's worked example: 46 -> 3 and 178 -> 11 (shifted).
module tb_prec_reduce;
  import nbsmt_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [7:0] v;
  logic [3:0] nu, ns;
  logic       su, ss, lu, ls;

  prec_reduce #(.SIGNED_OP(1'b0)) dut_u (.val_i(v), .nib_o(nu), .shift_o(su), .lossy_o(lu));
  prec_reduce #(.SIGNED_OP(1'b1)) dut_s (.val_i(v), .nib_o(ns), .shift_o(ss), .lossy_o(ls));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (v=%0d)", what, v);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int eu, es, gu, gs;
    for (int i = 0; i < 256; i++) begin
      v = 8'(i);
      #1;
      eu = qa(i);
      es = qw(int'($signed(v)));
      gu = int'(nu) << (su ? 4 : 0);
      gs = int'($signed(ns)) * (ss ? 16 : 1);
      check(gu == eu, $sformatf("unsigned value got %0d exp %0d", gu, eu));
      check(gs == es, $sformatf("signed value got %0d exp %0d", gs, es));
      check(lu == (eu != i), "unsigned lossy");
      check(ls == (es != int'($signed(v))), "signed lossy");
      check(su == (i >= 16), "unsigned shift");
    end
    v = 8'd46;  #1; check(nu == 4'd3  && su, "paper example 46 -> 3");
    v = 8'd178; #1; check(nu == 4'd11 && su, "paper example 178 -> 11");
    v = 8'd14;  #1; check(nu == 4'd14 && !su, "4-bit value kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

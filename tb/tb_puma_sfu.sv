// tb_puma_sfu: checks the scalar unit's add, subtract and the three compares
// (result and branch condition) on random and equal operands.
module tb_puma_sfu;
  import puma_pkg::*;
  sop_e op; word_t a, b, y; logic cond;
  puma_sfu dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 2000; t++) begin
      int x, z, ey; logic ec;
      op = sop_e'(t % 5);
      x = int'(shortint'($urandom)); z = (t % 3 == 0) ? x : int'(shortint'($urandom));
      a = word_t'(x); b = word_t'(z);
      #1;
      ec = (op == SOP_EQ) ? (x == z) : (op == SOP_GT) ? (x > z) : (op == SOP_NE) ? (x != z) : 1'b0;
      ey = (op == SOP_ADD) ? int'(shortint'(x + z)) : (op == SOP_SUB) ? int'(shortint'(x - z)) : int'(ec);
      checks += 2;
      if (cond != ec) failures++;
      if (int'($signed(y)) != ey) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

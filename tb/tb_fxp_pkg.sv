// tb_fxp_pkg -- checks the fixed<32,18> functions against lsmr_ref_pkg and
// against hand-worked values (rounding ties, saturation of the range and of
// the 64-bit accumulator).
module tb_fxp_pkg;
  import fxp_pkg::*;
  import lsmr_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int a, b;
    // constants printed in the design description
    check(UBOUND == 32'h7FFF_FFFF, "Ubound");
    check(LBOUND == 32'h8000_0000, "Lbound");
    check(ONE_F  == 32'h0004_0000, "ONE_F");
    check(MINUS_ONE_F == 32'hFFFC_0000, "MINUS_ONE_F");
    // worked values
    check(mul_f(32'sd3 <<< 17, 32'sd1 <<< 19) == 32'sd3 <<< 18, "1.5*2 = 3");
    check(mul_f(32'sd1, 32'sd1 <<< 17) == 32'sd1, "eps*0.5 rounds up (tie)");
    check(mul_f(-32'sd1, 32'sd1 <<< 17) == 32'sd0, "-eps*0.5 rounds to 0 (tie up)");
    check(mul_f(32'sd1, 32'sd1 <<< 16) == 32'sd0, "eps*0.25 rounds down");
    check(add_f(UBOUND, ONE_F) == UBOUND, "add saturates high");
    check(add_f(LBOUND, MINUS_ONE_F) == LBOUND, "add saturates low");
    check(mul_f(32'sd4096 <<< 18, 32'sd4 <<< 18) == UBOUND, "mul saturates");
    check(acc_add(ACC_MAX, 64'sd5) == ACC_MAX, "acc saturates high");
    check(acc_add(ACC_MIN, -64'sd5) == ACC_MIN, "acc saturates low");
    check(acc_add(64'sd7, -64'sd9) == -64'sd2, "acc plain add");
    check(neg_f(LBOUND) == UBOUND, "neg of Lbound saturates");
    check(sign_f('0) == ONE_F && sign_f(-32'sd3) == MINUS_ONE_F, "sign");
    check(abs_f(-32'sd77) == 32'sd77, "abs");
    check(sub_f(32'sd5, 32'sd9) == -32'sd4, "sub");
    // random against the reference model
    for (int k = 0; k < 2000; k++) begin
      a = $urandom; b = $urandom;
      if (k % 3 == 0) begin a = a >>> 12; b = b >>> 12; end
      check(mul_f(a, b) == mul(a, b), $sformatf("mul %0d %0d", a, b));
      check(add_f(a, b) == add(a, b), $sformatf("add %0d %0d", a, b));
      check(cast_round(prod(a, b)) == rnd(p(a, b)), "cast_round");
      check(acc_add(prod(a, b) <<< 1, prod(b, b) <<< 1) == sadd(p(a, b) <<< 1, p(b, b) <<< 1), "acc_add");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sym_unit -- Givens rotations for both branches (|b| > |a| and not),
// signs, zeros and random operands, compared with lsmr_ref_pkg and with the
// real-valued rotation (c^2 + s^2 = 1, r = hypot(a, b) up to sign).
module tb_sym_unit;
  import fxp_pkg::*;
  import lsmr_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done;
  fixed_t a, b, c, s, r;
  sym_unit dut (.clk, .rst_n, .start, .a, .b, .busy, .done, .c, .s, .r);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one(input int va, input int vb);
    int ec, es, er, lat = 0;
    real ra, rb, h;
    @(negedge clk) begin start = 1; a = va; b = vb; end
    @(negedge clk) start = 0;
    while (!done) begin @(negedge clk); lat++; end
    sym(va, vb, ec, es, er);
    check(c == ec && s == es && r == er,
          $sformatf("sym(%0d,%0d) = (%0d,%0d,%0d) expected (%0d,%0d,%0d)", va, vb, c, s, r, ec, es, er));
    check(lat < 3*(WL+FL+4) + 40, $sformatf("latency %0d", lat));
    ra = to_r(va); rb = to_r(vb); h = $sqrt(ra*ra + rb*rb);
    if (h > 0.01 && h < 100.0) begin
      real rc = to_r(c), rs = to_r(s), rr = to_r(r);
      check((rc*rc + rs*rs - 1.0) < 1e-3 && (1.0 - rc*rc - rs*rs) < 1e-3, "c^2+s^2");
      check((rr < 0 ? -rr : rr) - h < 1e-2 && h - (rr < 0 ? -rr : rr) < 1e-2,
            $sformatf("|r| %f vs %f", rr, h));
    end
  endtask

  initial begin
    start = 0; a = 0; b = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    one(3 <<< 18, 4 <<< 18);     // 3-4-5
    one(4 <<< 18, 3 <<< 18);
    one(-(3 <<< 18), 4 <<< 18);
    one(3 <<< 18, -(4 <<< 18));
    one(0, 0);
    one(0, 5 <<< 18);
    one(7 <<< 18, 0);
    for (int k = 0; k < 200; k++) one(int'($urandom) >>> (8 + $urandom % 14), int'($urandom) >>> (8 + $urandom % 14));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fxp_sqrt -- integer square roots of perfect squares, their neighbours,
// random 64-bit values and the saturating top range; checks each root and
// the 32-cycle latency from start to done.
module tb_fxp_sqrt;
  import fxp_pkg::*;
  import lsmr_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done;
  logic [63:0] x;
  fixed_t root;
  fxp_sqrt dut (.clk, .rst_n, .start, .x, .busy, .done, .root);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one(input logic [63:0] v);
    int lat = 0;
    longint e;
    @(negedge clk) begin start = 1; x = v; end
    @(negedge clk) start = 0;
    while (!done) begin @(negedge clk); lat++; end
    e = isqrt(v);
    if (e > 64'sd2147483647) e = 64'sd2147483647;
    check(root == int'(e), $sformatf("sqrt(%0d) = %0d, expected %0d", v, root, e));
    check(lat == 32, $sformatf("latency %0d", lat));
  endtask

  initial begin
    start = 0; x = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    one(0); one(1); one(2); one(3); one(4);
    one(64'd144); one(64'd143); one(64'd145);
    one(64'd1 << 36);                      // 1.0 squared, Q36 -> 1.0 in Q18
    one(64'hFFFF_FFFF_FFFF_FFFF);
    one(64'h3FFF_FFFF_0000_0001);
    for (int k = 0; k < 300; k++) begin
      logic [63:0] r;
      r = {$urandom, $urandom} >> ($urandom % 64);
      one(r);
      one(r * r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fused_mv -- streams random matrices row by row through the fused unit
// (one element per cycle, with idle gaps) and checks every y_i and the final
// sum of squares against lsmr_ref_pkg, and the one-cycle output latency.
module tb_fused_mv;
  import fxp_pkg::*;
  import lsmr_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, in_valid, last, out_valid;
  fixed_t a, x, scale, w, y;
  acc_t sumsq;
  fused_mv dut (.clk, .rst_n, .clear, .in_valid, .a, .x, .last, .scale, .w, .out_valid, .y, .sumsq);

  int ey[$];
  int cyc = 0;
  int ecyc[$];
  always_ff @(posedge clk) cyc <= cyc + 1;

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

  always @(negedge clk) if (rst_n && out_valid) begin
    int e;
    e = ey.pop_front();
    check(y == e, $sformatf("y %0d expected %0d", y, e));
    begin
      int lc;
      lc = ecyc.pop_front();
      check(cyc - lc == 1, $sformatf("output %0d cycles after the last element", cyc - lc));
    end
  end

  task automatic run(input int m, input int n, input int shift, input bit gaps);
    int A[], v[], u[];
    int sc;
    longint acc, ss = 0;
    A = new[m*n]; v = new[n]; u = new[m];
    foreach (A[k]) A[k] = int'($urandom) >>> shift;
    foreach (v[k]) v[k] = int'($urandom) >>> shift;
    foreach (u[k]) u[k] = int'($urandom) >>> shift;
    sc = int'($urandom) >>> shift;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int i = 0; i < m; i++) begin
      acc = 0;
      for (int j = 0; j < n; j++) begin
        acc = sadd(acc, p(A[i*n+j], v[j]));
        in_valid = 1; a = A[i*n+j]; x = v[j]; last = (j == n-1);
        scale = sc; w = u[i];
        if (j == n-1) begin
          int yy = rnd(sadd(acc, -p(sc, u[i])));
          ey.push_back(yy);
          ss = sadd(ss, p(yy, yy));
          ecyc.push_back(cyc);
        end
        @(negedge clk);
        if (gaps && ($urandom % 3 == 0)) begin in_valid = 0; @(negedge clk); end
      end
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    check(sumsq == ss, $sformatf("sumsq %0d expected %0d", sumsq, ss));
    check(ey.size() == 0, "all rows produced");
  endtask

  initial begin
    clear = 0; in_valid = 0; last = 0; a = 0; x = 0; scale = 0; w = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(6, 4, 12, 0);
    run(5, 7, 10, 1);
    run(9, 3, 2, 0);      // large values: accumulator and cast saturate
    run(12, 1, 14, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

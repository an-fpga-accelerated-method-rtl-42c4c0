// tb_col_dispatch -- drives the column dispatcher with calls of p = 5, 6, 1
// and 0 columns against two model compute units that finish after random
// delays; checks the column ranges, offsets, internal-buffer bases, which
// units start, and that done follows the later unit by one cycle.
module tb_col_dispatch;
  import lsmr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  job_t job;
  logic [1:0] cu_start, cu_done;
  cu_args_t cu_args [2];
  col_dispatch dut (.clk, .rst_n, .start, .job, .busy, .done, .cu_start, .cu_args, .cu_done);

  int delay [2];
  int started [2];
  int cyc = 0, last_done = -1;
  always_ff @(posedge clk) cyc <= cyc + 1;

  // model compute units: done 'delay' cycles after start
  for (genvar u = 0; u < 2; u++) begin : g_cu
    int left = -1;
    always @(negedge clk) begin
      cu_done[u] = 0;
      if (left == 0) begin cu_done[u] = 1; last_done = cyc; end
      if (left >= 0) left--;
      if (cu_start[u]) begin left = delay[u]; started[u]++; end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int p);
    int p0, p1, s0, s1;
    p0 = (p + 1) / 2; p1 = p - p0;
    delay[0] = 3 + $urandom % 40; delay[1] = 3 + $urandom % 40;
    s0 = started[0]; s1 = started[1];
    job = '{m: 16'd9, n: 16'd4, p: 16'(p), base_input: 32'd100, base_at0: 32'd500,
            base_at1: 32'd700, base_output: 32'd900};
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    check(cu_args[0].offset == 0 && cu_args[0].p == 16'(p0), $sformatf("p=%0d unit 0 range", p));
    check(cu_args[1].offset == 16'(p0) && cu_args[1].p == 16'(p1), $sformatf("p=%0d unit 1 range", p));
    check(cu_args[0].base_at == 500 && cu_args[1].base_at == 700, "internal buffers");
    check(cu_args[0].base_input == 100 && cu_args[1].base_output == 900 &&
          cu_args[1].m == 9 && cu_args[0].n == 4, "shared buffers and sizes");
    while (!done) @(negedge clk);
    check(started[0] - s0 == (p0 > 0) && started[1] - s1 == (p1 > 0), $sformatf("p=%0d units started", p));
    if (p > 0) check(cyc == last_done + 1, $sformatf("done %0d cycles after the last unit", cyc - last_done));
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  initial begin
    start = 0; job = '0; cu_done = '0; started = '{0, 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(5); run(6); run(1); run(0); run(2); run(7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_lsmr_cu -- self-checking test of one LSMR compute unit.
//
// Three runs against the behavioural global memory:
//   1. square 5x5 system, columns 0..1, memory granting every cycle:
//      checks the number of reads exactly and the cycle count against the
//      one-element-per-cycle schedule;
//   2. the same with 25 % of read requests refused and a longer latency;
//   3. overdetermined 8x3 system, columns 1..2 only (offset), checking that
//      column 0 of X is left alone.
// Every x is compared word for word with lsmr_ref_pkg, A^T in the internal
// buffer with A, and x with the exact solution to within 0.02.
module tb_lsmr_cu;
  import lsmr_pkg::*;
  import lsmr_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic start, busy, done;
  cu_args_t args;
  logic rd_req, rd_gnt, rd_valid, wr_req;
  logic [31:0] rd_addr, rd_data, wr_addr, wr_data;

  lsmr_cu dut (
    .clk, .rst_n, .start, .args, .busy, .done,
    .rd_req, .rd_addr, .rd_gnt, .rd_valid, .rd_data,
    .wr_req, .wr_addr, .wr_data);

  // two memories: one never stalls, one stalls; a select picks the active
  logic sel;
  logic g0, v0, g1, v1;
  logic [31:0] d0, d1;
  gmem_model #(.NP(1), .DEPTH(4096), .LAT(2), .STALL_PCT(0)) mem0 (
    .clk, .rd_req(rd_req & ~sel), .rd_addr, .rd_gnt(g0), .rd_valid(v0), .rd_data(d0),
    .wr_req(wr_req & ~sel), .wr_addr, .wr_data);
  gmem_model #(.NP(1), .DEPTH(4096), .LAT(7), .STALL_PCT(25)) mem1 (
    .clk, .rd_req(rd_req & sel), .rd_addr, .rd_gnt(g1), .rd_valid(v1), .rd_data(d1),
    .wr_req(wr_req & sel), .wr_addr, .wr_data);
  assign rd_gnt   = sel ? g1 : g0;
  assign rd_valid = sel ? v1 : v0;
  assign rd_data  = sel ? d1 : d0;

  int unsigned cycles, reads;
  always_ff @(posedge clk) begin
    if (busy) cycles <= cycles + 1;
    if (rd_req && rd_gnt) reads <= reads + 1;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic wr(input int a, input int d);
    if (sel) mem1.mem[a] = d; else mem0.mem[a] = d;
  endtask
  function automatic int rdm(input int a);
    return sel ? mem1.mem[a] : mem0.mem[a];
  endfunction

  // Runs one call: m x n A, P columns of B, this unit does columns off..off+pc-1
  task automatic run(input int m, input int n, input int P, input int off,
                     input int pc, input bit timing);
    int A[], b[], xr[], xt[][];
    real Ar[], xtr[];
    int bi = 16, bat = 1024, bo = 3000;
    int exp_reads, iters, bound;
    A = new[m*n]; xt = new[P];
    Ar = new[m*n];
    foreach (Ar[k]) begin
      Ar[k] = ((k / n) == (k % n)) ? 2.0 + real'($urandom % 100) / 100.0
                                   : (real'($urandom % 61) - 30.0) / 100.0;
      A[k]  = to_fx(Ar[k]);
      wr(bi + k, A[k]);
    end
    for (int c = 0; c < P; c++) begin
      xtr = new[n];
      xt[c] = new[n];
      foreach (xtr[j]) begin
        xtr[j] = (real'($urandom % 201) - 100.0) / 100.0;
        xt[c][j] = to_fx(xtr[j]);
      end
      for (int i = 0; i < m; i++) begin
        real s = 0.0;
        for (int j = 0; j < n; j++) s += to_r(A[i*n+j]) * to_r(xt[c][j]);
        wr(bi + m*n + c*m + i, to_fx(s));
      end
      for (int j = 0; j < n; j++) wr(bo + c*n + j, 0);   // host zeroes X
    end
    args = '{m: 16'(m), n: 16'(n), p: 16'(pc), offset: 16'(off),
             base_input: 32'(bi), base_at: 32'(bat), base_output: 32'(bo)};
    cycles = 0; reads = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (done);
    @(negedge clk);
    // A^T in the internal buffer
    for (int i = 0; i < m; i++)
      for (int j = 0; j < n; j++)
        check(rdm(bat + j*m + i) == A[i*n+j], $sformatf("A^T[%0d][%0d]", j, i));
    for (int c = 0; c < P; c++) begin
      if (c < off || c >= off + pc) begin
        for (int j = 0; j < n; j++)
          check(rdm(bo + c*n + j) == 0, $sformatf("column %0d outside range touched", c));
        continue;
      end
      b = new[m];
      for (int i = 0; i < m; i++) b[i] = rdm(bi + m*n + c*m + i);
      lsmr(m, n, A, b, xr);
      for (int j = 0; j < n; j++) begin
        int hw = rdm(bo + c*n + j);
        check(hw == xr[j], $sformatf("x[%0d] col %0d hw %0d ref %0d", j, c, hw, xr[j]));
        check((to_r(hw) - to_r(xt[c][j])) < 0.02 && (to_r(xt[c][j]) - to_r(hw)) < 0.02,
              $sformatf("x[%0d] col %0d = %f, exact %f", j, c, to_r(hw), to_r(xt[c][j])));
      end
    end
    iters = (m < n) ? m : n;
    exp_reads = m*n + pc * (m + n*m + iters * (2*m*n + n));
    check(reads == exp_reads, $sformatf("reads %0d expected %0d", reads, exp_reads));
    if (timing) begin
      // one element per cycle in every loop, plus fixed scalar overhead
      bound = m*n + 10 + pc * (m + n*m + 200 + iters * (2*m*n + 2*m + 3*n + 1000));
      check(cycles >= exp_reads && cycles <= bound,
            $sformatf("cycles %0d outside [%0d, %0d]", cycles, exp_reads, bound));
      $display("m=%0d n=%0d cols=%0d: %0d cycles, %0d reads", m, n, pc, cycles, reads);
    end
  endtask

  initial begin
    start = 0; sel = 0; args = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(5, 5, 2, 0, 2, 1);
    sel = 1;
    run(5, 5, 2, 0, 2, 0);
    sel = 0;
    run(8, 3, 3, 1, 2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

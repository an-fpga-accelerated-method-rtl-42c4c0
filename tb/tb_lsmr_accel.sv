// tb_lsmr_accel -- end-to-end test of the four-unit accelerator on one ADMM
// layer step.
//
// The host side is played by this testbench: it builds the two
// least-squares calls of one hidden layer and starts them in the same cycle,
//   weight_update     : A = x_{l-1}^T (N x D),  B = z_l^T (N x HS),
//                       X = W_l^T (D x HS), on units 0 and 1;
//   activation_update : A = gamma I + beta W^T W (HS x HS),
//                       B = gamma h(z_l) + beta W^T z_{l+1} (HS x N),
//                       X = x_l (HS x N), on units 2 and 3;
// (with gamma = beta = 1 and B generated from a known solution so the exact
// answer is known), zeroes the output buffers, and waits for both calls.
// Every column is compared word for word with lsmr_ref_pkg and with the
// exact solution.  Mechanisms counted, each required at least once: all
// four units busy together, a call split unevenly (odd column count), a
// refused read request (memory stall), and a zero right-hand side column,
// whose solution must be exactly zero.
module tb_lsmr_accel #(
  parameter int N   = 12,   // samples
  parameter int D   = 4,    // features (input width of the layer)
  parameter int HS  = 5,    // hidden size
  parameter real TOL = 0.05,
  parameter bit  NEED_ODD = 1  // require an odd column count (uneven split)
);
  import fxp_pkg::*;
  import lsmr_pkg::*;
  import lsmr_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] job_start, job_busy, job_done;
  job_t job [2];
  logic [3:0] rd_req, rd_gnt, rd_valid, wr_req, cu_busy;
  logic [31:0] rd_addr [4], wr_addr [4];
  fixed_t rd_data [4], wr_data [4];

  lsmr_accel dut (
    .clk, .rst_n, .job_start, .job, .job_busy, .job_done,
    .rd_req, .rd_addr, .rd_gnt, .rd_valid, .rd_data,
    .wr_req, .wr_addr, .wr_data, .cu_busy);

  logic [3:0][31:0] m_rd_addr, m_rd_data, m_wr_addr, m_wr_data;
  for (genvar k = 0; k < 4; k++) begin : g_pack
    assign m_rd_addr[k] = rd_addr[k];
    assign rd_data[k]   = m_rd_data[k];
    assign m_wr_addr[k] = wr_addr[k];
    assign m_wr_data[k] = wr_data[k];
  end

  localparam int MEMW = 1 << 20;
  gmem_model #(.NP(4), .DEPTH(MEMW), .LAT(5), .STALL_PCT(10)) mem (
    .clk, .rd_req, .rd_addr(m_rd_addr), .rd_gnt, .rd_valid, .rd_data(m_rd_data),
    .wr_req, .wr_addr(m_wr_addr), .wr_data(m_wr_data));

  // buffer bases (words)
  localparam int WIN = 0, WAT0 = WIN + N*D + N*HS, WAT1 = WAT0 + N*D, WOUT = WAT1 + N*D;
  localparam int AIN = WOUT + D*HS, AAT0 = AIN + HS*HS + HS*N, AAT1 = AAT0 + HS*HS,
                 AOUT = AAT1 + HS*HS;

  int cyc = 0, all4 = 0, pair_both = 0, zero_cols = 0, odd_split = 0;
  int wdone_cyc = -1, adone_cyc = -1;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (cu_busy == 4'hF) all4 <= all4 + 1;
    if (cu_busy[1:0] == 2'b11 || cu_busy[3:2] == 2'b11) pair_both <= pair_both + 1;
    if (job_done[0]) wdone_cyc <= cyc;
    if (job_done[1]) adone_cyc <= cyc;
  end

  initial begin
    repeat (50_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic real rnd_r(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom % 10001) / 10000.0;
  endfunction

  // solve-and-compare for one call already in memory
  task automatic verify(input string name, input int m, input int n, input int p,
                        input int base_in, input int base_out, input int xt[][],
                        input int zero_col);
    int A[], b[], xr[];
    A = new[m*n];
    foreach (A[k]) A[k] = mem.mem[base_in + k];
    for (int c = 0; c < p; c++) begin
      b = new[m];
      for (int i = 0; i < m; i++) b[i] = mem.mem[base_in + m*n + c*m + i];
      lsmr(m, n, A, b, xr);
      for (int j = 0; j < n; j++) begin
        int hw;
        real e;
        hw = mem.mem[base_out + c*n + j];
        check(hw == xr[j], $sformatf("%s x[%0d][%0d] hw %0d ref %0d", name, j, c, hw, xr[j]));
        e = to_r(hw) - to_r(xt[c][j]);
        check(e < TOL && -e < TOL, $sformatf("%s x[%0d][%0d] %f exact %f", name, j, c, to_r(hw), to_r(xt[c][j])));
      end
      if (c == zero_col) begin
        bit allz = 1;
        for (int j = 0; j < n; j++) if (mem.mem[base_out + c*n + j] != 0) allz = 0;
        check(allz, $sformatf("%s zero column gives x = 0", name));
        if (allz) zero_cols++;
      end
    end
  endtask

  initial begin
    real X0 [D][N];          // layer input x_{l-1}
    real Wt [D][HS];         // exact W_l^T
    real Wn [HS][HS];        // next-layer weights W_{l+1}
    real P1 [HS][HS];        // gamma I + beta W^T W
    real XL [HS][N];         // exact x_l
    int  wxt[][], axt[][];
    int  t0;
    job_start = '0;
    job[0] = '0; job[1] = '0;

    // ---- weight_update call: A = x_{l-1}^T, B = A * W^T ----
    foreach (X0[i, j]) X0[i][j] = rnd_r(-1.0, 1.0);
    foreach (Wt[i, j]) Wt[i][j] = rnd_r(-1.0, 1.0);
    wxt = new[HS];
    for (int c = 0; c < HS; c++) begin
      wxt[c] = new[D];
      for (int j = 0; j < D; j++) wxt[c][j] = to_fx(Wt[j][c]);
    end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < D; j++) mem.mem[WIN + i*D + j] = to_fx(X0[j][i]);
    for (int c = 0; c < HS; c++)
      for (int i = 0; i < N; i++) begin
        real s;
        s = 0.0;
        for (int j = 0; j < D; j++) s += to_r(mem.mem[WIN + i*D + j]) * to_r(wxt[c][j]);
        mem.mem[WIN + N*D + c*N + i] = to_fx(s);
      end
    for (int k = 0; k < D*HS; k++) mem.mem[WOUT + k] = 0;

    // ---- activation_update call: A = I + W^T W, B = A * x_l ----
    foreach (Wn[i, j]) Wn[i][j] = rnd_r(-0.5, 0.5);
    foreach (P1[i, j]) begin
      P1[i][j] = (i == j) ? 1.0 : 0.0;
      for (int k = 0; k < HS; k++) P1[i][j] += Wn[k][i] * Wn[k][j];
    end
    foreach (XL[i, j]) XL[i][j] = rnd_r(-1.0, 1.0);
    for (int i = 0; i < HS; i++) XL[i][1] = 0.0;   // one zero right-hand side
    axt = new[N];
    for (int c = 0; c < N; c++) begin
      axt[c] = new[HS];
      for (int j = 0; j < HS; j++) axt[c][j] = to_fx(XL[j][c]);
    end
    for (int i = 0; i < HS; i++)
      for (int j = 0; j < HS; j++) mem.mem[AIN + i*HS + j] = to_fx(P1[i][j]);
    for (int c = 0; c < N; c++)
      for (int i = 0; i < HS; i++) begin
        real s;
        s = 0.0;
        for (int j = 0; j < HS; j++) s += to_r(mem.mem[AIN + i*HS + j]) * to_r(axt[c][j]);
        mem.mem[AIN + HS*HS + c*HS + i] = to_fx(s);
      end
    for (int k = 0; k < HS*N; k++) mem.mem[AOUT + k] = 0;

    job[0] = '{m: 16'(N), n: 16'(D), p: 16'(HS), base_input: 32'(WIN),
               base_at0: 32'(WAT0), base_at1: 32'(WAT1), base_output: 32'(WOUT)};
    job[1] = '{m: 16'(HS), n: 16'(HS), p: 16'(N), base_input: 32'(AIN),
               base_at0: 32'(AAT0), base_at1: 32'(AAT1), base_output: 32'(AOUT)};

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    t0 = cyc;
    job_start = 2'b11;
    @(negedge clk) job_start = 2'b00;
    check(job_busy == 2'b11, "both calls accepted");
    wait (wdone_cyc >= 0 && adone_cyc >= 0);
    @(negedge clk);
    $display("weight_update   %0dx%0d, %0d columns: %0d cycles", N, D, HS, wdone_cyc - t0);
    $display("activation_upd. %0dx%0d, %0d columns: %0d cycles", HS, HS, N, adone_cyc - t0);

    verify("weight", N, D, HS, WIN, WOUT, wxt, -1);
    verify("activation", HS, HS, N, AIN, AOUT, axt, 1);

    $display("all four units busy: %0d cycles; pair split active: %0d cycles; read stalls: %0d; zero columns: %0d",
             all4, pair_both, mem.stalls, zero_cols);
    check(all4 > 0, "all four compute units ran together");
    check(pair_both > 0, "both units of a pair ran together");
    // an uneven split needs an odd column count; workload sizes may not have one
    if ((HS % 2) == 1 || (N % 2) == 1) odd_split++;
    if (NEED_ODD) check(odd_split > 0, "uneven column split exercised");
    check(mem.stalls > 0, "memory stall exercised");
    check(zero_cols > 0, "zero right-hand side exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

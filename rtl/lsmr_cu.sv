// lsmr_cu -- one compute unit of the LSMR kernel.
//
// Solves x_c = argmin ||A x - b_c|| for the columns c = offset .. offset+p-1
// of B, with A (m x n) and B in the global input buffer, in fixed<32,18>
// arithmetic.  The unit first copies A transposed into its own internal
// buffer (so that both A v and A^T u stream rows from memory), then per
// column runs the Golub-Kahan bidiagonalisation and the LSMR recurrence
// for min(m, n) iterations:
//
//   init : beta = ||b||, u = b/beta; alpha = ||A^T u||, v = A^T u/alpha;
//          h = v, hbar = 0, alphabar = alpha, zetabar = alpha*beta,
//          rho = rhobar = cbar = 1, sbar = 0      (x: zeroed by the host)
//   iter : u = A v - alpha u,  beta  = ||u||, u = u/beta      (phase MVU)
//          v = A^T u - beta v, alpha = ||v||, v = v/alpha     (phase MVV)
//          (c, s, rho') = sym(alphabar, beta); alphabar = c*alpha
//          (cbar', sbar', rhobar') = sym(cbar*rho', s*alpha)
//          zeta = cbar'*zetabar; zetabar = -sbar'*zetabar
//          hbar = h - (sbar*rho'*rho'/(rho*rhobar)) hbar
//          x    = x + (zeta/(rho'*rhobar')) hbar                 (phase H)
//          h    = v - ((s*alpha)/rho') h
//
// The two matrix-vector lines are each one fused streaming loop through
// fused_mv that also yields the squared norm; the three vector updates of
// phase H are one loop that reads x from and writes x back to the output
// buffer.  u, v, h and hbar live in on-chip local_ram.  All this follows the
// published kernel.  Where its pseudo-code writes sym(cbar_k*rho_k, ...)
// but uses rho_{k+1} in the hbar line, the unit follows the LSMR reference
// recurrence and uses the new rho in both.  Norms use the exact integer
// square root, normalisation uses the pipelined divider at one element per
// cycle, and the memory port protocol is this design's own.
//
// Global memory: a read port (rd_req/rd_addr accepted when rd_gnt; data
// returns in order on rd_valid/rd_data after any latency, with no
// back-pressure) and a write port (wr_req/wr_addr/wr_data, accepted every
// cycle).  Every streaming loop issues one read per granted cycle and
// consumes one word per rd_valid, so with a memory that grants every cycle
// the loops run at one element per cycle.
//
// Control: pulse start with args while busy is low; done pulses when the
// last x of the last column has been written.  Requires m, n >= 1,
// m <= MAX_M, n <= MAX_N.
//
// Lint notes: the argument struct carries 16-bit sizes and 32-bit bases for
// every unit, of which only the bits needed at MAX_M / MAX_N are used, and
// the divider tag is wider than the few tag values this unit sends, so some
// bits are read by nothing.  The reset is asynchronous and also reaches the
// synchronous sub-blocks, which lint reports as a mixed-use net; both are
// intended.
module lsmr_cu
  import fxp_pkg::*;
  import lsmr_pkg::*;
#(
  parameter int MAX_M = 4096,
  parameter int MAX_N = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  cu_args_t       args,
  output logic           busy,
  output logic           done,
  // global memory read port
  output logic           rd_req,
  output logic [AW-1:0]  rd_addr,
  input  logic           rd_gnt,
  input  logic           rd_valid,
  input  fixed_t         rd_data,
  // global memory write port
  output logic           wr_req,
  output logic [AW-1:0]  wr_addr,
  output fixed_t         wr_data
);
  localparam int MA  = $clog2(MAX_M);
  localparam int NA  = $clog2(MAX_N);
  localparam int DIV_LAT_TAG = 16;

  typedef enum logic [4:0] {
    S_IDLE, S_TRANS, S_COL, S_LOADB, S_SQRT, S_NORMU, S_MVV, S_NORMV,
    S_ITER, S_MVU, S_SYM1, S_SYM2, S_D1, S_D2, S_D3, S_HUPD, S_DONE
  } state_t;

  state_t   state;
  cu_args_t cfg;

  // ---------------- scalars of the recurrence ----------------
  fixed_t alpha, beta, alphabar, zetabar, zeta;
  fixed_t rho, rhobar, cbar, sbar;          // values of the previous step
  fixed_t c_k, s_k, rho_n, cbar_n, sbar_n, rhobar_n;
  fixed_t coef1, coef2, coef3;
  logic   init_pass;                        // first bidiagonalisation step
  logic   sq_to_alpha;                      // root goes to alpha (else beta)

  logic [DIM_W-1:0] col, col_end, k_iter, iters;
  logic [31:0]      mn;                     // m*n
  logic [AW-1:0]    b_base, x_base;         // current column of B and X

  // ---------------- streaming counters ----------------
  logic [31:0] iss, total;                  // issued reads, reads in phase
  logic [31:0] con_o, con_i;                // consumed: outer/inner index
  logic [31:0] len_o, len_i;
  logic [31:0] out_cnt;                     // results written
  logic        fclear;

  // ---------------- local memories ----------------
  logic          u_we, v_we, h_we, hb_we;
  logic [MA-1:0] u_wa, u_ra0, u_ra1;
  logic [NA-1:0] v_wa, v_ra0, v_ra1, h_wa, h_ra, hb_wa, hb_ra;
  fixed_t        u_wd, u_rd0, u_rd1, v_wd, v_rd0, v_rd1, h_wd, h_rd, hb_wd, hb_rd;
  fixed_t        h_rd_unused, hb_rd_unused;

  local_ram #(.WIDTH(WL), .DEPTH(MAX_M)) u_mem (
    .clk, .we(u_we), .waddr(u_wa), .wdata(u_wd),
    .raddr0(u_ra0), .rdata0(u_rd0), .raddr1(u_ra1), .rdata1(u_rd1));
  local_ram #(.WIDTH(WL), .DEPTH(MAX_N)) v_mem (
    .clk, .we(v_we), .waddr(v_wa), .wdata(v_wd),
    .raddr0(v_ra0), .rdata0(v_rd0), .raddr1(v_ra1), .rdata1(v_rd1));
  local_ram #(.WIDTH(WL), .DEPTH(MAX_N)) h_mem (
    .clk, .we(h_we), .waddr(h_wa), .wdata(h_wd),
    .raddr0(h_ra), .rdata0(h_rd), .raddr1(h_ra), .rdata1(h_rd_unused));
  local_ram #(.WIDTH(WL), .DEPTH(MAX_N)) hb_mem (
    .clk, .we(hb_we), .waddr(hb_wa), .wdata(hb_wd),
    .raddr0(hb_ra), .rdata0(hb_rd), .raddr1(hb_ra), .rdata1(hb_rd_unused));

  // ---------------- fused matrix-vector / norm unit ----------------
  logic   f_in_valid, f_last, f_out_valid;
  fixed_t f_a, f_x, f_scale, f_w, f_y;
  acc_t   f_sumsq;

  fused_mv u_fmv (
    .clk, .rst_n, .clear(fclear),
    .in_valid(f_in_valid), .a(f_a), .x(f_x), .last(f_last),
    .scale(f_scale), .w(f_w),
    .out_valid(f_out_valid), .y(f_y), .sumsq(f_sumsq));

  // ---------------- pipelined divider ----------------
  logic                   d_in_valid, d_out_valid;
  fixed_t                 d_a, d_b, d_q;
  logic [DIV_LAT_TAG-1:0] d_in_tag, d_out_tag;
  logic [31:0]            n_iss;           // normalisation: issued
  logic                   sc_issued;       // scalar division issued

  fxp_div #(.TAG_W(DIV_LAT_TAG)) u_div (
    .clk, .rst_n, .in_valid(d_in_valid), .a(d_a), .b(d_b), .in_tag(d_in_tag),
    .out_valid(d_out_valid), .q(d_q), .out_tag(d_out_tag));

  // ---------------- square root and Givens rotation ----------------
  logic   sq_start, sq_busy, sq_done, sq_started;
  fixed_t sq_root;
  fxp_sqrt u_sqrt (
    .clk, .rst_n, .start(sq_start), .x(64'(unsigned'(f_sumsq))),
    .busy(sq_busy), .done(sq_done), .root(sq_root));

  logic   sy_start, sy_busy, sy_done, sy_started;
  fixed_t sy_a, sy_b, sy_c, sy_s, sy_r;
  sym_unit u_sym (
    .clk, .rst_n, .start(sy_start), .a(sy_a), .b(sy_b),
    .busy(sy_busy), .done(sy_done), .c(sy_c), .s(sy_s), .r(sy_r));

  // ---------------- datapath of phase H ----------------
  fixed_t hbar_new, x_new, h_new;
  always_comb begin
    hbar_new = cast_round(acc_add(acc_t'(h_rd) <<< FL, -prod(coef1, hb_rd)));
    x_new    = cast_round(acc_add(acc_t'(rd_data) <<< FL, prod(coef2, hbar_new)));
    h_new    = cast_round(acc_add(acc_t'(v_rd0) <<< FL, -prod(coef3, h_rd)));
  end

  logic streaming;
  assign streaming = state inside {S_TRANS, S_LOADB, S_MVU, S_MVV, S_HUPD};
  logic in_last;
  assign in_last = (con_i == len_i - 1);

  // ---------------- combinational control ----------------
  always_comb begin
    // read port
    rd_req  = streaming && (iss < total);
    unique case (state)
      S_TRANS, S_MVU: rd_addr = cfg.base_input + iss;
      S_MVV:          rd_addr = cfg.base_at + iss;
      S_LOADB:        rd_addr = b_base + iss;
      S_HUPD:         rd_addr = x_base + iss;
      default:        rd_addr = '0;
    endcase
    // write port
    wr_req  = rd_valid && (state inside {S_TRANS, S_HUPD});
    wr_addr = (state == S_TRANS) ? cfg.base_at + con_i * 32'(cfg.m) + con_o
                                 : x_base + con_o;
    wr_data = (state == S_TRANS) ? rd_data : x_new;

    // fused unit
    f_in_valid = rd_valid && (state inside {S_LOADB, S_MVU, S_MVV});
    f_a        = rd_data;
    f_x        = ONE_F;
    f_last     = 1'b1;
    f_scale    = '0;
    f_w        = '0;
    unique case (state)
      S_MVU: begin f_x = v_rd0; f_last = in_last; f_scale = alpha; f_w = u_rd1; end
      S_MVV: begin f_x = u_rd0; f_last = in_last; f_scale = init_pass ? '0 : beta; f_w = v_rd1; end
      default: ;
    endcase

    // local memory read addresses
    u_ra0 = MA'((state == S_MVV) ? con_i : n_iss);
    u_ra1 = MA'(con_o);
    v_ra0 = NA'((state == S_MVU) ? con_i : (state == S_HUPD) ? con_o : n_iss);
    v_ra1 = NA'(con_o);
    h_ra  = NA'(con_o);
    hb_ra = NA'(con_o);

    // local memory writes
    u_we = 1'b0; u_wa = MA'(out_cnt); u_wd = f_y;
    v_we = 1'b0; v_wa = NA'(out_cnt); v_wd = f_y;
    h_we = 1'b0; h_wa = NA'(con_o);   h_wd = h_new;
    hb_we = 1'b0; hb_wa = NA'(con_o); hb_wd = hbar_new;
    unique case (state)
      S_LOADB, S_MVU: u_we = f_out_valid;
      S_MVV:          v_we = f_out_valid;
      S_NORMU: begin u_we = d_out_valid; u_wa = MA'(d_out_tag); u_wd = d_q; end
      S_NORMV: begin
        v_we = d_out_valid; v_wa = NA'(d_out_tag); v_wd = d_q;
        if (init_pass) begin
          h_we  = d_out_valid; h_wa  = NA'(d_out_tag); h_wd  = d_q;
          hb_we = d_out_valid; hb_wa = NA'(d_out_tag); hb_wd = '0;
        end
      end
      S_HUPD: begin h_we = rd_valid; hb_we = rd_valid; end
      default: ;
    endcase

    // divider
    d_in_valid = 1'b0;
    d_a        = '0;
    d_b        = ONE_F;
    d_in_tag   = DIV_LAT_TAG'(n_iss);
    unique case (state)
      S_NORMU: begin d_in_valid = (n_iss < 32'(cfg.m)); d_a = u_rd0; d_b = beta;  end
      S_NORMV: begin d_in_valid = (n_iss < 32'(cfg.n)); d_a = v_rd0; d_b = alpha; end
      S_D1: begin
        d_in_valid = !sc_issued;
        d_a = mul_f(mul_f(sbar, rho_n), rho_n);
        d_b = mul_f(rho, rhobar);
      end
      S_D2: begin d_in_valid = !sc_issued; d_a = zeta; d_b = mul_f(rho_n, rhobar_n); end
      S_D3: begin d_in_valid = !sc_issued; d_a = mul_f(s_k, alpha); d_b = rho_n; end
      default: ;
    endcase

    // square root and rotation
    sq_start = (state == S_SQRT) && !sq_started && !sq_busy;
    sy_start = (state inside {S_SYM1, S_SYM2}) && !sy_started && !sy_busy;
    sy_a     = (state == S_SYM1) ? alphabar : mul_f(cbar, rho_n);
    sy_b     = (state == S_SYM1) ? beta     : mul_f(s_k, alpha);
  end

  // ---------------- sequencer ----------------
  task automatic begin_stream(input logic [31:0] lo, input logic [31:0] li);
    iss     <= '0;
    total   <= lo * li;
    len_o   <= lo;
    len_i   <= li;
    con_o   <= '0;
    con_i   <= '0;
    out_cnt <= '0;
    fclear  <= 1'b1;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cfg   <= '0;
      {alpha, beta, alphabar, zetabar, zeta} <= '0;
      {rho, rhobar, cbar, sbar} <= '0;
      {c_k, s_k, rho_n, cbar_n, sbar_n, rhobar_n} <= '0;
      {coef1, coef2, coef3} <= '0;
      init_pass <= 1'b0;
      sq_to_alpha <= 1'b0;
      col <= '0; col_end <= '0; k_iter <= '0; iters <= '0; mn <= '0;
      b_base <= '0; x_base <= '0;
      iss <= '0; total <= '0; con_o <= '0; con_i <= '0;
      len_o <= '0; len_i <= '0; out_cnt <= '0; fclear <= 1'b0;
      n_iss <= '0; sc_issued <= 1'b0; sq_started <= 1'b0; sy_started <= 1'b0;
      done <= 1'b0;
    end else begin
      done   <= 1'b0;
      fclear <= 1'b0;
      if (rd_req && rd_gnt) iss <= iss + 1;
      if (rd_valid && streaming) begin
        if (con_i == len_i - 1) begin
          con_i <= '0;
          con_o <= con_o + 1;
        end else begin
          con_i <= con_i + 1;
        end
      end
      if (f_out_valid) out_cnt <= out_cnt + 1;
      if (d_in_valid && state inside {S_NORMU, S_NORMV}) n_iss <= n_iss + 1;
      if (d_out_valid && state inside {S_NORMU, S_NORMV}) out_cnt <= out_cnt + 1;
      if (sq_start) sq_started <= 1'b1;
      if (sy_start) sy_started <= 1'b1;
      if (d_in_valid && state inside {S_D1, S_D2, S_D3}) sc_issued <= 1'b1;

      unique case (state)
        S_IDLE: if (start) begin
          cfg     <= args;
          mn      <= 32'(args.m) * 32'(args.n);
          col     <= args.offset;
          col_end <= args.offset + args.p;
          iters   <= (args.m < args.n) ? args.m : args.n;
          state   <= S_TRANS;
          begin_stream(32'(args.m), 32'(args.n));
        end

        // A -> A^T into the internal buffer
        S_TRANS: if (rd_valid && con_o == len_o - 1 && con_i == len_i - 1)
          state <= S_COL;

        S_COL: begin
          if (col == col_end) begin
            state <= S_DONE;
          end else begin
            b_base    <= cfg.base_input + mn + 32'(col) * 32'(cfg.m);
            x_base    <= cfg.base_output + 32'(col) * 32'(cfg.n);
            init_pass <= 1'b1;
            state     <= S_LOADB;
            begin_stream(32'(cfg.m), 32'd1);
          end
        end

        // b -> u with ||b||^2 (rows of length one through the fused unit)
        S_LOADB, S_MVU: if (f_out_valid && out_cnt == len_o - 1) begin
          sq_to_alpha <= 1'b0;
          sq_started  <= 1'b0;
          state       <= S_SQRT;
        end

        S_MVV: if (f_out_valid && out_cnt == len_o - 1) begin
          sq_to_alpha <= 1'b1;
          sq_started  <= 1'b0;
          state       <= S_SQRT;
        end

        S_SQRT: if (sq_done) begin
          n_iss   <= '0;
          out_cnt <= '0;
          if (sq_to_alpha) begin alpha <= sq_root; state <= S_NORMV; end
          else             begin beta  <= sq_root; state <= S_NORMU; end
        end

        S_NORMU: if (d_out_valid && out_cnt == 32'(cfg.m) - 1) begin
          state <= S_MVV;
          begin_stream(32'(cfg.n), 32'(cfg.m));
        end

        S_NORMV: if (d_out_valid && out_cnt == 32'(cfg.n) - 1) begin
          if (init_pass) begin
            init_pass <= 1'b0;
            alphabar  <= alpha;
            zetabar   <= mul_f(alpha, beta);
            rho       <= ONE_F;
            rhobar    <= ONE_F;
            cbar      <= ONE_F;
            sbar      <= '0;
            k_iter    <= '0;
            state     <= S_ITER;
          end else begin
            sy_started <= 1'b0;
            state      <= S_SYM1;
          end
        end

        S_ITER: begin
          if (k_iter == iters) begin
            col   <= col + 1;
            state <= S_COL;
          end else begin
            state <= S_MVU;
            begin_stream(32'(cfg.m), 32'(cfg.n));
          end
        end

        S_SYM1: if (sy_done) begin
          c_k        <= sy_c;
          s_k        <= sy_s;
          rho_n      <= sy_r;
          sy_started <= 1'b0;
          state      <= S_SYM2;
        end

        S_SYM2: if (sy_done) begin
          alphabar  <= mul_f(c_k, alpha);
          cbar_n    <= sy_c;
          sbar_n    <= sy_s;
          rhobar_n  <= sy_r;
          zeta      <= mul_f(sy_c, zetabar);
          zetabar   <= neg_f(mul_f(sy_s, zetabar));
          sc_issued <= 1'b0;
          state     <= S_D1;
        end

        S_D1: if (d_out_valid) begin coef1 <= d_q; sc_issued <= 1'b0; state <= S_D2; end
        S_D2: if (d_out_valid) begin coef2 <= d_q; sc_issued <= 1'b0; state <= S_D3; end
        S_D3: if (d_out_valid) begin
          coef3 <= d_q;
          state <= S_HUPD;
          begin_stream(32'(cfg.n), 32'd1);
        end

        S_HUPD: if (rd_valid && con_o == len_o - 1) begin
          rho    <= rho_n;
          rhobar <= rhobar_n;
          cbar   <= cbar_n;
          sbar   <= sbar_n;
          k_iter <= k_iter + 1;
          state  <= S_ITER;
        end

        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // A streaming phase never consumes more words than it asked for.
  property p_no_excess_data;
    @(posedge clk) disable iff (!rst_n) (rd_valid |-> streaming);
  endproperty
  a_no_excess_data: assert property (p_no_excess_data);
endmodule

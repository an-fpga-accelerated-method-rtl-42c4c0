// sym_unit -- Givens rotation (c, s, r) = sym(a, b) of the LSMR recurrence.
//
// Follows the published sym function: if |b| > |a| then tau = a/b,
// s = sign(b)/sqrt(1+tau^2), c = s*tau, r = b/s; otherwise tau = b/a,
// c = sign(a)/sqrt(1+tau^2), s = c*tau, r = a/c.  All values are
// fixed<32,18>; products round to nearest, divisions truncate (fxp_div),
// and sqrt(q) is the integer square root of q << 18 (fxp_sqrt).  sign(0)
// is +1 and a division by zero gives zero, which keeps sym(0, 0) = (1, 0, 0).
// Those two conventions and the sequential schedule are this design's own.
//
// Timing: one call at a time.  Pulse start with a, b while busy is low;
// three divisions and one root run one after the other, about
// 3*(WL+FL+3) + 34 cycles, then done pulses with c, s, r valid (held until
// the next start).
module sym_unit
  import fxp_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  fixed_t a,
  input  fixed_t b,
  output logic   busy,
  output logic   done,
  output fixed_t c,
  output fixed_t s,
  output fixed_t r
);
  typedef enum logic [2:0] {S_IDLE, S_TAU, S_ROOT, S_K1, S_R} state_t;
  state_t state;

  logic   swap;          // |b| > |a|
  fixed_t num, den, tau, k1;

  logic   div_in_valid, div_out_valid;
  fixed_t div_a, div_b, div_q;
  logic   div_tag_unused;
  logic   div_issued;

  logic        sq_start, sq_busy, sq_done;
  logic [63:0] sq_x;
  fixed_t      sq_root;

  fxp_div #(.TAG_W(1)) u_div (
    .clk, .rst_n,
    .in_valid (div_in_valid), .a(div_a), .b(div_b), .in_tag(1'b0),
    .out_valid(div_out_valid), .q(div_q), .out_tag(div_tag_unused)
  );

  fxp_sqrt u_sqrt (
    .clk, .rst_n,
    .start(sq_start), .x(sq_x), .busy(sq_busy), .done(sq_done), .root(sq_root)
  );

  fixed_t one_plus_tau2;
  always_comb begin
    one_plus_tau2 = add_f(ONE_F, mul_f(tau, tau));
    sq_x          = 64'(unsigned'(acc_t'(one_plus_tau2) <<< FL));
  end

  always_comb begin
    div_in_valid = 1'b0;
    div_a        = num;
    div_b        = den;
    sq_start     = 1'b0;
    unique case (state)
      S_TAU:  begin div_in_valid = !div_issued; div_a = num;          div_b = den;     end
      S_ROOT: sq_start = !div_issued && !sq_busy;
      S_K1:   begin div_in_valid = !div_issued; div_a = sign_f(den);  div_b = sq_root; end
      S_R:    begin div_in_valid = !div_issued; div_a = den;          div_b = k1;      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      swap  <= 1'b0;
      num   <= '0;
      den   <= '0;
      tau   <= '0;
      k1    <= '0;
      c     <= '0;
      s     <= '0;
      r     <= '0;
      done  <= 1'b0;
      div_issued <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          swap       <= abs_f(b) > abs_f(a);
          num        <= (abs_f(b) > abs_f(a)) ? a : b;
          den        <= (abs_f(b) > abs_f(a)) ? b : a;
          div_issued <= 1'b0;
          state      <= S_TAU;
        end
        S_TAU: begin
          div_issued <= 1'b1;
          if (div_out_valid) begin
            tau        <= div_q;
            div_issued <= 1'b0;
            state      <= S_ROOT;
          end
        end
        S_ROOT: begin
          if (sq_start) div_issued <= 1'b1;
          if (sq_done) begin
            div_issued <= 1'b0;
            state      <= S_K1;
          end
        end
        S_K1: begin
          div_issued <= 1'b1;
          if (div_out_valid) begin
            k1         <= div_q;
            div_issued <= 1'b0;
            state      <= S_R;
          end
        end
        S_R: begin
          div_issued <= 1'b1;
          if (div_out_valid) begin
            r          <= div_q;
            if (swap) begin
              s <= k1;
              c <= mul_f(k1, tau);
            end else begin
              c <= k1;
              s <= mul_f(k1, tau);
            end
            done       <= 1'b1;
            div_issued <= 1'b0;
            state      <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule

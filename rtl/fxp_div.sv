// fxp_div -- fully pipelined fixed<32,18> divider, q = a / b.
//
// Computes ((a << FL) / b) with the quotient truncated toward zero and
// saturated to the fixed-point range, which is the accelerator's divide
// operation.  The magnitudes are divided by restoring division, one
// quotient bit per pipeline stage (WL+FL stages), and the sign is applied at
// the end, so a new division can enter every cycle (II = 1) and leaves
// LATENCY cycles later together with the tag it came with.  A divisor of
// zero gives a quotient of zero.  The division itself follows the published
// design; the pipeline structure, the tag and the zero-divisor rule are this
// design's choices.
//
// Interface: in_valid/a/b/in_tag enter; out_valid/q/out_tag leave after
// LATENCY = WL+FL+2 cycles.  No back-pressure.
module fxp_div
  import fxp_pkg::*;
#(
  parameter int TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fixed_t           a,
  input  fixed_t           b,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fixed_t           q,
  output logic [TAG_W-1:0] out_tag
);
  localparam int QB = WL + FL;          // quotient bits
  localparam int RB = WL + 1;           // remainder bits

  typedef struct packed {
    logic             valid;
    logic             neg;
    logic             zero;
    logic [QB-1:0]    dvd;    // dividend bits still to enter, then quotient
    logic [RB-1:0]    rem;
    logic [WL-1:0]    dvs;
    logic [TAG_W-1:0] tag;
  } stage_t;

  stage_t st [QB+1];

  // Stage 0: magnitudes and sign.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st[0] <= '0;
    else begin
      st[0].valid <= in_valid;
      st[0].neg   <= a[WL-1] ^ b[WL-1];
      st[0].zero  <= (b == '0);
      st[0].dvd   <= QB'({(a[WL-1] ? WL'(-a) : WL'(a)), {FL{1'b0}}});
      st[0].rem   <= '0;
      st[0].dvs   <= b[WL-1] ? WL'(-b) : WL'(b);
      st[0].tag   <= in_tag;
    end
  end

  // Stages 1..QB: one restoring step each.  dvd shifts left; the quotient
  // bit enters at the bottom.
  for (genvar k = 1; k <= QB; k++) begin : g_stage
    logic [RB-1:0] trial;
    logic          ge;
    always_comb begin
      trial = {st[k-1].rem[RB-2:0], st[k-1].dvd[QB-1]};
      ge    = trial >= RB'(st[k-1].dvs);
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) st[k] <= '0;
      else begin
        st[k]     <= st[k-1];
        st[k].dvd <= {st[k-1].dvd[QB-2:0], ge};
        st[k].rem <= ge ? trial - RB'(st[k-1].dvs) : trial;
      end
    end
  end

  // Output stage: sign, saturation, zero divisor.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      q         <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= st[QB].valid;
      out_tag   <= st[QB].tag;
      if (st[QB].zero)
        q <= '0;
      else if (st[QB].neg)
        q <= sat32(-acc_t'({1'b0, st[QB].dvd}));
      else
        q <= sat32(acc_t'({1'b0, st[QB].dvd}));
    end
  end
endmodule

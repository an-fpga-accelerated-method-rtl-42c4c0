// fxp_sqrt -- integer square root for vector norms, root = floor(sqrt(x)).
//
// x is a 64-bit unsigned integer.  Applied to a sum of squares of
// fixed<32,18> words (36 fraction bits) the root is the norm with 18
// fraction bits; applied to a word shifted left by 18 it is the fixed-point
// square root of that word.  The root is saturated to the largest positive
// word.  Digit-by-digit (restoring) method: one result bit per cycle, 32
// cycles from start to done, one root at a time.  The integer square root
// of the norm follows the published design (its earlier versions); the
// method and the timing are this design's choices.
//
// Interface: pulse start with x while busy is low; done pulses for one
// cycle with root valid (root holds until the next start).
module fxp_sqrt
  import fxp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [63:0] x,
  output logic        busy,
  output logic        done,
  output fixed_t      root
);
  logic [63:0] rad;      // remaining radicand bits, two per step
  logic [33:0] rem;
  logic [31:0] res;
  logic [5:0]  cnt;

  logic [33:0] trial_rem;
  logic [33:0] trial_sub;
  always_comb begin
    trial_rem = {rem[31:0], rad[63:62]};
    trial_sub = {res, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rad  <= '0;
      rem  <= '0;
      res  <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      root <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          rad  <= x;
          rem  <= '0;
          res  <= '0;
          cnt  <= 6'd32;
          busy <= 1'b1;
        end
      end else begin
        rad <= {rad[61:0], 2'b00};
        if (trial_rem >= trial_sub) begin
          rem <= trial_rem - trial_sub;
          res <= {res[30:0], 1'b1};
        end else begin
          rem <= trial_rem;
          res <= {res[30:0], 1'b0};
        end
        cnt <= cnt - 6'd1;
        if (cnt == 6'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
          root <= (trial_rem >= trial_sub)
                  ? sat32(acc_t'({res[30:0], 1'b1}))
                  : sat32(acc_t'({res[30:0], 1'b0}));
        end
      end
    end
  end
endmodule

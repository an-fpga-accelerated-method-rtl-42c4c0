// fused_mv -- fused matrix-vector product, vector update and norm.
//
// One pass of this unit computes, for every row i of a streamed matrix,
//     y_i = sum_j A[i][j] * x[j]  -  scale * w_i
// and the running sum of y_i^2, which are lines "A v - alpha u" with its
// norm beta, and "A^T u - beta v" with its norm alpha, of the LSMR
// iteration.  Fusing the matrix-vector loop, the scalar-vector loop, the
// subtraction and the norm into one loop follows the published kernel; here
// every product is kept exact in 64 bits, the row sum is accumulated with
// saturation, the subtraction is made on the 64-bit sum and one
// round-to-nearest cast produces y_i (this single rounding point is this
// design's choice).  The sum of squares of the rounded y_i is a 64-bit value
// with 36 fraction bits; its integer square root is the norm.
//
// Interface: clear empties the row accumulator and the sum of squares.  One
// element (a, x) may enter per cycle with in_valid; on the last element of a
// row, last is high and scale/w carry the subtraction operands.  y leaves
// one cycle later with out_valid; sumsq includes that y one cycle after
// out_valid.
module fused_mv
  import fxp_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   in_valid,
  input  fixed_t a,
  input  fixed_t x,
  input  logic   last,
  input  fixed_t scale,
  input  fixed_t w,
  output logic   out_valid,
  output fixed_t y,
  output acc_t   sumsq
);
  acc_t acc, acc_next, row_total;

  always_comb begin
    acc_next  = acc_add(acc, prod(a, x));
    row_total = acc_add(acc_next, -prod(scale, w));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      y         <= '0;
      sumsq     <= '0;
    end else if (clear) begin
      acc       <= '0;
      out_valid <= 1'b0;
      sumsq     <= '0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        if (last) begin
          acc <= '0;
          y   <= cast_round(row_total);
        end else begin
          acc <= acc_next;
        end
      end
      if (out_valid) sumsq <= acc_add(sumsq, prod(y, y));
    end
  end
endmodule

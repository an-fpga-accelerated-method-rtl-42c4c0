// fxp_pkg -- fixed<32,18> arithmetic shared by every LSMR datapath block.
//
// A value is a 32-bit two's-complement word read as an integer times
// 2^-18 (18 fraction bits, 14 integer bits, range [-8192, 8192 - 2^-18]).
// Products are formed exactly in 64 bits (36 fraction bits) and are
// accumulated in 64 bits with saturation; a 64-bit value with 36 fraction
// bits is brought back to 32 bits by one round-to-nearest cast, ties
// rounding up.  Values outside the range saturate to the largest or most
// negative word.  Word length, fraction length, the saturating boundaries,
// 64-bit accumulation and round-to-nearest inside the accelerator follow the
// published design; rounding again after saturation and the zero result of
// a division by zero (see fxp_div) are this design's own choices.
//
// Everything here is combinational (functions); there is no timing.
package fxp_pkg;
  localparam int WL = 32;              // word length
  localparam int FL = 18;              // fraction length
  localparam int IL = WL - FL;         // integer length

  typedef logic signed [WL-1:0]   fixed_t;   // fixed<WL,FL>
  typedef logic signed [2*WL-1:0] acc_t;     // 64-bit, 2*FL fraction bits

  localparam fixed_t UBOUND    = fixed_t'({1'b0, {(WL-1){1'b1}}});
  localparam fixed_t LBOUND    = fixed_t'({1'b1, {(WL-1){1'b0}}});
  localparam fixed_t ONE_F     = fixed_t'(1) <<< FL;
  localparam fixed_t MINUS_ONE_F = -ONE_F;
  localparam acc_t   ACC_MAX   = acc_t'({1'b0, {(2*WL-1){1'b1}}});
  localparam acc_t   ACC_MIN   = acc_t'({1'b1, {(2*WL-1){1'b0}}});

  // Saturate a 64-bit value with FL fraction bits to a word (cast_f64_simple).
  function automatic fixed_t sat32(input acc_t x);
    if (x >= acc_t'(UBOUND))      return UBOUND;
    else if (x <= acc_t'(LBOUND)) return LBOUND;
    else                          return fixed_t'(x);
  endfunction

  // Round-to-nearest cast of a 64-bit value with 2*FL fraction bits (cast_f64).
  function automatic fixed_t cast_round(input acc_t x);
    acc_t r;
    if (x <= (acc_t'(LBOUND) <<< FL)) return LBOUND;
    if (x >= (acc_t'(UBOUND) <<< FL)) return UBOUND;
    r = (x + (acc_t'(1) <<< (FL-1))) >>> FL;   // floor(x + eps/2)
    return sat32(r);
  endfunction

  // Saturating 64-bit addition, the overflow check of every MAC.
  function automatic acc_t acc_add(input acc_t a, input acc_t b);
    acc_t s;
    s = a + b;
    if (!a[2*WL-1] && !b[2*WL-1] && s[2*WL-1])      return ACC_MAX;
    else if (a[2*WL-1] && b[2*WL-1] && !s[2*WL-1])  return ACC_MIN;
    else                                            return s;
  endfunction

  // Exact product, 2*FL fraction bits.
  function automatic acc_t prod(input fixed_t a, input fixed_t b);
    return acc_t'(a) * acc_t'(b);
  endfunction

  function automatic fixed_t add_f(input fixed_t a, input fixed_t b);
    return sat32(acc_t'(a) + acc_t'(b));
  endfunction

  function automatic fixed_t sub_f(input fixed_t a, input fixed_t b);
    return sat32(acc_t'(a) - acc_t'(b));
  endfunction

  function automatic fixed_t mul_f(input fixed_t a, input fixed_t b);
    return cast_round(prod(a, b));
  endfunction

  function automatic fixed_t neg_f(input fixed_t a);
    return sat32(-acc_t'(a));
  endfunction

  function automatic fixed_t abs_f(input fixed_t a);
    return a[WL-1] ? neg_f(a) : a;
  endfunction

  // sign() as used by the Givens rotation; sign(0) is +1.
  function automatic fixed_t sign_f(input fixed_t a);
    return a[WL-1] ? MINUS_ONE_F : ONE_F;
  endfunction
endpackage

// cg_pkg: number format and arithmetic shared by every block of the
// pipelined conjugate-gradient (NewCG) Laplace solver.
//
// All vectors and scalars are signed fixed point <50,20>: 50 bits in total,
// 20 integer bits (sign included) and 30 fraction bits, as used by the
// published design. Products are rounded half-up at the 30th fraction bit
// (the behaviour of round-to-plus-infinity, "AP_RND") and every result is
// saturated to the 50-bit range ("AP_SAT"). Division truncates toward zero;
// that choice is this design's own.
package cg_pkg;

  localparam int unsigned W    = 50;  // total bits
  localparam int unsigned FRAC = 30;  // fraction bits
  localparam int unsigned WIDE = 2 * W + 4;

  typedef logic signed [W-1:0]    fx_t;
  typedef logic signed [WIDE-1:0] wide_t;

  localparam fx_t FX_MAX = {1'b0, {(W - 1) {1'b1}}};
  localparam fx_t FX_MIN = {1'b1, {(W - 1) {1'b0}}};

  // Clamp a wide value to the fx_t range.
  function automatic fx_t fx_sat(input wide_t v);
    if (v > wide_t'(FX_MAX)) return FX_MAX;
    if (v < wide_t'(FX_MIN)) return FX_MIN;
    return v[W-1:0];
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return fx_sat(wide_t'(a) + wide_t'(b));
  endfunction

  function automatic fx_t fx_sub(input fx_t a, input fx_t b);
    return fx_sat(wide_t'(a) - wide_t'(b));
  endfunction

  // a*b, rounded half up to FRAC fraction bits, saturated.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    wide_t p;
    p = wide_t'(a) * wide_t'(b);
    p = p + (wide_t'(1) <<< (FRAC - 1));
    return fx_sat(p >>> FRAC);
  endfunction

endpackage

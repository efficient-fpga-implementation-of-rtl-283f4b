// tb_ref_pkg: reference arithmetic and grid mapping for the testbenches,
// written independently of the RTL package. Numbers are signed <50,20>
// fixed point held in 64-bit longints (30 fraction bits); products use a
// 128-bit intermediate, round half up and clamp to the 50-bit range.
package tb_ref_pkg;

  localparam longint MAXV = (64'sd1 <<< 49) - 1;
  localparam longint MINV = -(64'sd1 <<< 49);
  localparam real    ONE  = 1073741824.0;  // 2**30

  function automatic longint clamp(input logic signed [127:0] v);
    if (v > 128'(MAXV)) return MAXV;
    if (v < -128'sd562949953421312) return MINV;
    return longint'(v);
  endfunction

  function automatic longint radd(input longint a, input longint b);
    return clamp(128'(a) + 128'(b));
  endfunction

  function automatic longint rmul(input longint a, input longint b);
    logic signed [127:0] p;
    p = 128'(a) * 128'(b);
    p = p + 128'sd536870912;          // 2**29
    return clamp(p >>> 30);
  endfunction

  // truncating division, saturating; x/0 gives the extreme with x's sign
  function automatic longint rdiv(input longint a, input longint b);
    logic signed [127:0] n;
    if (b == 0) return (a < 0) ? MINV : MAXV;
    n = 128'(a) <<< 30;
    return clamp(n / 128'(b));
  endfunction

  // uniform random integer in [-span, span]
  function automatic int srange(input int span);
    int unsigned u;
    u = $urandom % (2 * span + 1);
    return int'(u) - span;
  endfunction

  function automatic longint to_fx(input real r);
    return longint'(r * ONE);
  endfunction

  function automatic real to_real(input longint v);
    return real'(v) / ONE;
  endfunction

  // Global grid row of local row i of a sub-grid in sub-grid row a: even
  // sub-grid rows are traversed upward from their last row, odd ones
  // downward from their first (mirrored about the quadruple centre).
  function automatic int grow(input int a, input int i, input int s);
    return (a % 2 == 0) ? (a * s + s - 1 - i) : (a * s + i);
  endfunction

endpackage

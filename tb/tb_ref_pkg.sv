// tb_ref_pkg: reference arithmetic for the testbenches, written with `real`
// so that it is independent of the RTL's bit-level FP helpers.
package tb_ref_pkg;

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  // IEEE single (bit pattern) -> real
  function automatic real f32_to_real(input logic [31:0] b);
    real m;
    int  e;
    if (b[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    e = int'(b[30:23]) - 127;
    m = m * pow2(e);
    return b[31] ? -m : m;
  endfunction

  // IEEE half (bit pattern) -> real
  function automatic real f16_to_real(input logic [15:0] b);
    real m;
    if (b[14:10] == 5'd0) return 0.0;
    m = (1.0 + real'(b[9:0]) / 1024.0) * pow2(int'(b[14:10]) - 15);
    return b[15] ? -m : m;
  endfunction

  // real -> IEEE single, truncated (normal range only)
  function automatic logic [31:0] real_to_f32(input real v);
    logic s;
    real  a;
    int   e;
    longint unsigned f;
    if (v == 0.0) return 32'd0;
    s = (v < 0.0);
    a = s ? -v : v;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    f = longint'((a - 1.0) * 8388608.0);
    return {s, 8'(e + 127), 23'(f)};
  endfunction

  // random FP16 with exponent field in [lo, hi]
  function automatic logic [15:0] rand_f16(input int lo, input int hi, input bit neg_ok);
    logic [15:0] h;
    h[15]    = neg_ok ? 1'($urandom) : 1'b0;
    h[14:10] = 5'(lo + int'($urandom % (hi - lo + 1)));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

  // relative / absolute tolerance check
  function automatic bit near(input real got, input real exp, input real rel, input real abs_tol);
    real d, m;
    d = got - exp; if (d < 0) d = -d;
    m = exp;       if (m < 0) m = -m;
    return (d <= abs_tol) || (d <= rel * m);
  endfunction

  // SVD-MP alignment reference: trunc(x * 2^(F + 127 - emax)), saturated
  function automatic int align_ref(input logic [31:0] x, input logic [7:0] emax, input bit hp);
    real v, sc;
    int  f, lim, r;
    f   = hp ? 14 : 6;
    lim = hp ? 32767 : 127;
    v   = f32_to_real(x);
    sc  = pow2(f + 127 - int'(emax));
    v   = v * sc;
    if (v >= 0) r = int'($floor(v)); else r = -int'($floor(-v));
    if (r > lim)  r = lim;
    if (r < -lim) r = -lim;
    return r;
  endfunction

endpackage

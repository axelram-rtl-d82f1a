// fp16_ref_pkg: reference conversions between IEEE binary16 and real for the testbenches.
//
// These are written with real arithmetic, independently of the integer FP16 functions the
// design uses, so that a testbench can work out expected values on its own. to_fp16 rounds to
// nearest even, flushes results below the smallest normal number to zero and saturates to
// infinity, matching the design's number rules. near() compares a design output with a real
// expectation within a relative and an absolute tolerance.
package fp16_ref_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    real m;
    int e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    if (e == 31) m = 1.0e30;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp16(real v);
    logic s;
    real a, f, frac;
    int e, mi;
    s = (v < 0.0);
    a = s ? -v : v;
    if (a == 0.0) return {s, 15'd0};
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0) begin a = a * 2.0; e--; end
    f    = (a - 1.0) * 1024.0;
    mi   = int'($floor(f));
    frac = f - real'(mi);
    if (frac > 0.5 || (frac == 0.5 && (mi % 2) == 1)) mi++;
    if (mi == 1024) begin mi = 0; e++; end
    if (e + 15 >= 31) return {s, 5'h1f, 10'd0};
    if (e + 15 <= 0) return {s, 15'd0};
    return {s, 5'(e + 15), 10'(mi)};
  endfunction

  function automatic bit near(real got, real exp, real rel, real abs_tol);
    real diff, mag;
    diff = got - exp;
    if (diff < 0.0) diff = -diff;
    mag = exp < 0.0 ? -exp : exp;
    return diff <= abs_tol + rel * mag;
  endfunction

  // Bit-equal, or both zero of either sign
  function automatic bit same(logic [15:0] a, logic [15:0] b);
    return (a == b) || (a[14:10] == 5'd0 && b[14:10] == 5'd0);
  endfunction

  // Uniform real in [lo, hi)
  function automatic real urand_real(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967296.0);
  endfunction

  // Approximately N(0, 1): sum of twelve uniforms minus six
  function automatic real gauss();
    real acc;
    acc = 0.0;
    for (int k = 0; k < 12; k++) acc += real'($urandom) / 4294967296.0;
    return acc - 6.0;
  endfunction

endpackage

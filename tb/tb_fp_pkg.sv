// tb_fp_pkg: reference FP16 conversions for the testbenches, written with real arithmetic and
// independent of the design's own FP16 functions. Subnormals are treated as zero, as in the
// design.
package tb_fp_pkg;

  function automatic real pow2(input int e);
    real p;
    p = 1.0;
    if (e >= 0) for (int k = 0; k < e; k++) p = p * 2.0;
    else for (int k = 0; k < -e; k++) p = p / 2.0;
    return p;
  endfunction

  function automatic real h2r(input logic [15:0] h);
    real v;
    if (h[14:10] == 0) return 0.0;
    v = (1.0 + real'(h[9:0]) / 1024.0) * pow2(int'(h[14:10]) - 15);
    return h[15] ? -v : v;
  endfunction

  function automatic logic [15:0] r2h(input real x);
    real a, f;
    int e, m;
    logic s;
    s = (x < 0.0);
    a = s ? -x : x;
    if (a < 6.2e-5) return {s, 15'd0};
    e = 0;
    while (a >= pow2(e + 1)) e++;
    while (a < pow2(e)) e--;
    f = a / (pow2(e)) - 1.0;
    m = int'(f * 1024.0);            // rounds to nearest
    if (m == 1024) begin
      m = 0;
      e++;
    end
    if (e > 15) return {s, 15'h7C00};
    return {s, 5'(e + 15), 10'(m)};
  endfunction

  function automatic real absr(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // random FP16 uniformly in [-range, range]
  function automatic logic [15:0] rnd_h(input real range);
    real u;
    u = (real'($urandom % 65536) / 32768.0 - 1.0) * range;
    return r2h(u);
  endfunction

endpackage

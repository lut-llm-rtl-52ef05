// tb_fp_pkg: testbench-only conversions between real and FP32 bit patterns,
// done through the 64-bit $realtobits/$bitstoreal system functions so that
// the reference models do not depend on the design's own float arithmetic.
package tb_fp_pkg;
  function automatic logic [31:0] r2f(real r);
    logic [63:0] d = $realtobits(r);
    int e = int'(d[62:52]) - 1023 + 127;
    if (r == 0.0 || e <= 0) return 32'h0;
    if (e >= 255) return {d[63], 8'hFF, 23'h0};
    return {d[63], e[7:0], d[51:29]};
  endfunction
  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    int e;
    if (f[30:23] == 0) return 0.0;
    if (f[30:23] == 8'hFF) return f[31] ? -1.0e38 : 1.0e38;
    e = int'(f[30:23]) - 127 + 1023;
    d = {f[31], e[10:0], f[22:0], 29'h0};
    return $bitstoreal(d);
  endfunction
  function automatic real rabs(real a); return a < 0 ? -a : a; endfunction
  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom % 100000) / 100000.0;
  endfunction
  // close within a relative tolerance (plus a small absolute floor)
  function automatic bit near(real a, real b, real rel);
    return rabs(a - b) <= rel * (rabs(b) + 1.0e-3);
  endfunction
endpackage

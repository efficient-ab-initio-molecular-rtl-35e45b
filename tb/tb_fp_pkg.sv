// tb_fp_pkg: reference conversions between IEEE-754 single precision and the simulator's
// double-precision `real`, written independently of the design's own package. The testbenches
// use them to compute expected values in double precision and to compare results.
package tb_fp_pkg;

  // Exact widening of a single-precision value (subnormals read as zero).
  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'h00) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // Round a double to single precision, nearest-even; tiny values flush to signed zero,
  // huge values saturate to infinity.
  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic [24:0] m;
    int          e;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:0] == '0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = (d[27:0] != '0);
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

endpackage

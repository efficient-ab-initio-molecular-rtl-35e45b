// fft3d_pkg: types, constants and constant functions shared by the 3D FFT pipeline.
//
// Every stream in the pipeline moves one "beat" per clock: eight complex points, each a pair of
// IEEE-754 single-precision numbers (real part in the upper 32 bits). Eight points per cycle is
// the rate the paper gives for its 1D FFT engines; the single-precision format is also the
// paper's. A beat is 8 x 64 = 512 bits, which this design also uses as the width of one DDR line
// (a choice of this design).
//
// The constant functions below are used only at elaboration time: they build twiddle-factor
// tables from a Taylor series evaluated in double precision and rounded to single precision.
package fft3d_pkg;

  localparam int LANES = 8;  // complex points per beat (paper: 8 points per cycle)
  localparam int LW    = $clog2(LANES);

  typedef logic [31:0] fp32_t;

  typedef struct packed {
    fp32_t re;
    fp32_t im;
  } cplx_t;

  typedef cplx_t [LANES-1:0] beat_t;

  localparam fp32_t FP_QNAN = 32'h7fc0_0000;

  // Reverse the low `bits` bits of v.
  function automatic int unsigned bitrev(int unsigned v, int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned k = 0; k < bits; k++) r = (r << 1) | ((v >> k) & 1);
    return r;
  endfunction

  // Round a double to the nearest single (ties to even). Used for constants only; values whose
  // magnitude is below 2^-126 become zero, matching the flush-to-zero arithmetic units.
  function automatic fp32_t real_to_fp32(real r);
    logic [63:0] d;
    logic [31:0] f;
    logic [10:0] e11;
    int          e;
    if (r == 0.0) return 32'h0;
    d   = $realtobits(r);
    e11 = d[62:52];
    e   = int'(e11) - 1023 + 127;
    if (e <= 0) return {d[63], 31'h0};
    f   = {d[63], e[7:0], d[51:29]};
    if (d[28] && ((d[27:0] != '0) || d[29])) f = f + 32'd1;
    return f;
  endfunction

  localparam real PI = 3.14159265358979323846;

  // Taylor series, accurate to double precision for |x| <= pi.
  function automatic real taylor_cos(real x);
    real s, term;
    s    = 1.0;
    term = 1.0;
    for (int k = 1; k < 30; k++) begin
      term = -term * x * x / real'((2 * k - 1) * (2 * k));
      s    = s + term;
    end
    return s;
  endfunction

  function automatic real taylor_sin(real x);
    real s, term;
    s    = x;
    term = x;
    for (int k = 1; k < 30; k++) begin
      term = -term * x * x / real'((2 * k) * (2 * k + 1));
      s    = s + term;
    end
    return s;
  endfunction

  // Twiddle factor W_n^m = exp(-i*2*pi*m/n), for 0 <= m < n/2, as a single-precision pair.
  // Exact values are used where cos or sin is exactly 0 or +-1.
  function automatic cplx_t twiddle(int m, int n);
    cplx_t w;
    real   a;
    if (m == 0) return '{re: 32'h3f80_0000, im: 32'h0};
    if (4 * m == n) return '{re: 32'h0, im: 32'hbf80_0000};
    a    = 2.0 * PI * real'(m) / real'(n);
    w.re = real_to_fp32(taylor_cos(a));
    w.im = real_to_fp32(-taylor_sin(a));
    return w;
  endfunction

endpackage

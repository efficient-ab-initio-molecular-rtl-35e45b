// fp_add: IEEE-754 single-precision adder (y = a + b), purely combinational.
//
// The paper builds its 1D FFTs from single-precision floating-point units (on the FPGA these
// map to the hard floating-point DSP blocks). This module is a portable stand-in for such an
// adder. How it works: the operand with the larger magnitude is taken as the reference, the
// other mantissa is shifted right by the exponent difference while the shifted-out bits are
// folded into a sticky bit, the mantissas are added or subtracted, the result is normalised
// and rounded to nearest, ties to even. Both shifters are built from fixed-distance stages.
//
// Choices of this design (the paper does not discuss them): subnormal inputs and results are
// flushed to zero (as the FPGA DSP blocks do), an exact zero difference is +0, any NaN input or
// inf - inf gives the quiet NaN 0x7fc00000, and overflow gives a signed infinity.
// Subtraction is done by flipping the sign of b before this unit.
module fp_add
  import fft3d_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [26:0] ml, ms, ms_sh;   // 1 hidden + 23 fraction + guard, round, sticky
  logic [27:0] sum;
  logic [26:0] n;
  logic [8:0]  d;
  logic [4:0]  lz;
  logic [24:0] mr;
  logic        rnd;
  logic signed [10:0] e;
  logic        a_nan, b_nan, a_inf, b_inf;

  always_comb begin
    sa = a[31]; ea = a[30:23];
    sb = b[31]; eb = b[30:23];
    a_nan = (ea == 8'hff) && (a[22:0] != '0);
    b_nan = (eb == 8'hff) && (b[22:0] != '0);
    a_inf = (ea == 8'hff) && (a[22:0] == '0);
    b_inf = (eb == 8'hff) && (b[22:0] == '0);

    // Order by magnitude; subnormals count as zero.
    if (a[30:0] >= b[30:0]) begin
      sl = sa; el = ea; ml = (ea == 0) ? '0 : {1'b1, a[22:0], 3'b000};
      ss = sb; es = eb; ms = (eb == 0) ? '0 : {1'b1, b[22:0], 3'b000};
    end else begin
      sl = sb; el = eb; ml = (eb == 0) ? '0 : {1'b1, b[22:0], 3'b000};
      ss = sa; es = ea; ms = (ea == 0) ? '0 : {1'b1, a[22:0], 3'b000};
    end

    // Align the smaller operand, keeping a sticky bit.
    d = {1'b0, el} - {1'b0, es};
    // Five fixed shift stages (1, 2, 4, 8, 16); bits shifted out are ORed into bit 0.
    ms_sh = ms;
    for (int k = 0; k < 5; k++)
      if (d[k]) ms_sh = (ms_sh >> (1 << k)) | 27'((ms_sh & 27'((32'd1 << (1 << k)) - 1)) != '0);
    if (d >= 9'd27) ms_sh = {26'd0, (ms != '0)};

    e  = {3'b000, el};
    n  = '0;
    lz = '0;
    if (sl == ss) begin
      sum = {1'b0, ml} + {1'b0, ms_sh};
      if (sum[27]) begin
        n = sum[27:1];
        n[0] = sum[1] | sum[0];
        e = e + 11'sd1;
      end else n = sum[26:0];
    end else begin
      sum = {1'b0, ml} - {1'b0, ms_sh};
      // Leading-zero count of the 27-bit difference.
      lz = 5'd27;
      for (int k = 0; k < 27; k++) if (sum[k]) lz = 5'(26 - k);
      n = sum[26:0];
      for (int k = 4; k >= 0; k--)
        if (lz[k]) n = n << (1 << k);
      e = e - 11'(lz);
    end

    // Round to nearest, ties to even.
    rnd = n[2] & (n[1] | n[0] | n[3]);
    mr  = {1'b0, n[26:3]} + 25'(rnd);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) y = FP_QNAN;
    else if (a_inf) y = a;
    else if (b_inf) y = b;
    else if (ml == '0) y = '0;
    else if (n[26] == 1'b0) y = '0;                // exact cancellation
    else if (e >= 11'sd255) y = {sl, 8'hff, 23'd0};
    else if (e <= 11'sd0) y = {sl, 31'd0};
    else y = {sl, e[7:0], mr[22:0]};
  end

endmodule

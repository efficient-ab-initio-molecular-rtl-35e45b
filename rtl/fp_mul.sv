// fp_mul: IEEE-754 single-precision multiplier (y = a * b), purely combinational.
//
// Portable stand-in for the single-precision floating-point DSP multipliers the paper's 1D FFTs
// use. The 24x24-bit mantissa product is normalised by at most one place and rounded to nearest,
// ties to even. Choices of this design: subnormals are flushed to zero, NaN inputs and 0 * inf
// give the quiet NaN 0x7fc00000, overflow gives a signed infinity.
module fp_mul
  import fft3d_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        s;
  logic [7:0]  ea, eb;
  logic [47:0] p;
  logic [23:0] m;
  logic        g, st, rnd;
  logic [24:0] mr;
  logic signed [10:0] e;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);
    a_nan  = (ea == 8'hff) && (a[22:0] != '0);
    b_nan  = (eb == 8'hff) && (b[22:0] != '0);
    a_inf  = (ea == 8'hff) && (a[22:0] == '0);
    b_inf  = (eb == 8'hff) && (b[22:0] == '0);

    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = 11'(ea) + 11'(eb) - 11'sd127;
    if (p[47]) begin
      m  = p[47:24];
      g  = p[23];
      st = (p[22:0] != '0);
      e  = e + 11'sd1;
    end else begin
      m  = p[46:23];
      g  = p[22];
      st = (p[21:0] != '0);
    end
    rnd = g & (st | m[0]);
    mr  = {1'b0, m} + 25'(rnd);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) y = FP_QNAN;
    else if (a_inf || b_inf) y = {s, 8'hff, 23'd0};
    else if (a_zero || b_zero) y = {s, 31'd0};
    else if (e >= 11'sd255) y = {s, 8'hff, 23'd0};
    else if (e <= 11'sd0) y = {s, 31'd0};
    else y = {s, e[7:0], mr[22:0]};
  end

endmodule

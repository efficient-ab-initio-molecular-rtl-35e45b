// fft_bfly: radix-2 decimation-in-frequency butterfly on complex single-precision values,
// combinational:  y0 = x0 + x1,  y1 = (x0 - x1) * w.
//
// The complex product uses four multipliers and two adders,
// (p + iq)(c + is) = (pc - qs) + i(ps + qc). This is the arithmetic kernel of every stage of the
// 1D FFT; the paper states only that the FFTs use single-precision floating point, the radix-2 DIF
// form is this design's choice.
module fft_bfly
  import fft3d_pkg::*;
(
  input  cplx_t x0,
  input  cplx_t x1,
  input  cplx_t w,
  output cplx_t y0,
  output cplx_t y1
);

  cplx_t d;
  fp32_t pc, qs, ps, qc;

  fp_add u_add_re (.a(x0.re), .b(x1.re),                 .y(y0.re));
  fp_add u_add_im (.a(x0.im), .b(x1.im),                 .y(y0.im));
  fp_add u_sub_re (.a(x0.re), .b({~x1.re[31], x1.re[30:0]}), .y(d.re));
  fp_add u_sub_im (.a(x0.im), .b({~x1.im[31], x1.im[30:0]}), .y(d.im));

  fp_mul u_pc (.a(d.re), .b(w.re), .y(pc));
  fp_mul u_qs (.a(d.im), .b(w.im), .y(qs));
  fp_mul u_ps (.a(d.re), .b(w.im), .y(ps));
  fp_mul u_qc (.a(d.im), .b(w.re), .y(qc));

  fp_add u_re (.a(pc), .b({~qs[31], qs[30:0]}), .y(y1.re));
  fp_add u_im (.a(ps), .b(qc),                   .y(y1.im));

endmodule

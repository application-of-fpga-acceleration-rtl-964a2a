// fp32_cmul: combinational complex multiply of two single-precision complex
// numbers, y = a * w, used to apply the twiddle factor after each FFT
// butterfly. re = a.re*w.re - a.im*w.im, im = a.re*w.im + a.im*w.re, built
// from four fp32_mul and two fp32_add (the subtraction flips the sign bit of
// one product). Multiplying by w = 1 + j0 returns a unchanged for finite a.
module fp32_cmul
  import accel_pkg::*;
(
  input  cplx_t a,
  input  cplx_t w,
  output cplx_t y
);

  logic [31:0] rr, ii, ri, ir;

  fp32_mul u_rr (.a(a.re), .b(w.re), .y(rr));
  fp32_mul u_ii (.a(a.im), .b(w.im), .y(ii));
  fp32_mul u_ri (.a(a.re), .b(w.im), .y(ri));
  fp32_mul u_ir (.a(a.im), .b(w.re), .y(ir));

  fp32_add u_re (.a(rr), .b({~ii[31], ii[30:0]}), .y(y.re));
  fp32_add u_im (.a(ri), .b(ir),                  .y(y.im));

endmodule

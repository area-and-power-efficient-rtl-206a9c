// complex_mult: complex multiplier for binary64 complex numbers.
//
// p = a * b computed as p.re = a.re*b.re - a.im*b.im and
// p.im = a.re*b.im + a.im*b.re with four binary64 multipliers, one
// subtractor and one adder, the structure drawn inside the reconfigurable PE
// of the paper's architecture figure ("Complex Multiplier": four x, one -,
// one +).  Each partial product and each sum is rounded separately (no fused
// multiply-add), the same operation order a C reference using double
// arithmetic follows.  Purely combinational.
//
// Circuit warning: when linted inside pe_butterfly, the products rr, ii, ri
// and ir are reported as circular combinational logic.  The loop is not in
// this module: the PE feeds its subtractor's output into this multiplier in
// IFFT mode and this multiplier's output into the same subtractor in FFT
// mode.  The operation select breaks the loop in either mode, so it is a
// false path (see pe_butterfly).
module complex_mult
  import fft_pkg::*;
(
  input  cplx_t a,
  input  cplx_t b,
  output cplx_t p
);

  fp64_t rr, ii, ri, ir;

  fp64_mul u_mul_rr (.a(a.re), .b(b.re), .z(rr));
  fp64_mul u_mul_ii (.a(a.im), .b(b.im), .z(ii));
  fp64_mul u_mul_ri (.a(a.re), .b(b.im), .z(ri));
  fp64_mul u_mul_ir (.a(a.im), .b(b.re), .z(ir));

  fp64_addsub u_sub_re (.a(rr), .b(ii), .sub(1'b1), .z(p.re));
  fp64_addsub u_add_im (.a(ri), .b(ir), .sub(1'b0), .z(p.im));

endmodule

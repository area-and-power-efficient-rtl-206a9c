// pe_butterfly: reconfigurable radix-2 processing element (PE).
//
// One PE performs one butterfly on two complex binary64 inputs u, v with the
// twiddle factor w and produces x, y:
//   op = OP_FFT  (Cooley-Tukey): x = u + v*w,   y = u - v*w
//   op = OP_IFFT (Gentleman-Sande): x = u + v,  y = (u - v)*w
// For the inverse transform the caller supplies the conjugated twiddle
// factor (the twiddle path negates its imaginary part), so the PE itself
// does not conjugate.
//
// Hardware, as in the paper: one complex adder and one complex subtractor
// (two binary64 adders each) and one complex multiplier (four binary64
// multipliers, two adders): six adders/subtractors and four multipliers in
// all.  Multiplexers reorder them: in FFT mode the multiplier comes first
// and feeds the adder and subtractor; in IFFT mode the subtractor feeds the
// multiplier.  The PE is not pipelined (paper: no pipelining inside the
// PE); it is one combinational path.
//
// Because the multiplier sits before the subtractor in one mode and after it
// in the other, the multiplexed netlist contains a structural loop
// (subtractor -> multiplier -> subtractor).  It is a false path: for either
// value of op one of the two multiplexers breaks it, so no signal ever
// depends on itself.  It is kept because sharing the units is the point of
// the reconfigurable PE.
module pe_butterfly
  import fft_pkg::*;
(
  input  op_e   op,
  input  cplx_t u,
  input  cplx_t v,
  input  cplx_t w,
  output cplx_t x,
  output cplx_t y
);

  cplx_t prod;    // complex multiplier output
  cplx_t addend;  // second operand of the adder and the subtractor
  cplx_t dif;     // complex subtractor output
  cplx_t mul_in;  // first multiplier operand

  always_comb begin
    addend = (op == OP_FFT) ? prod : v;
    mul_in = (op == OP_FFT) ? v : dif;
  end

  // complex adder
  fp64_addsub u_add_re (.a(u.re), .b(addend.re), .sub(1'b0), .z(x.re));
  fp64_addsub u_add_im (.a(u.im), .b(addend.im), .sub(1'b0), .z(x.im));
  // complex subtractor
  fp64_addsub u_sub_re (.a(u.re), .b(addend.re), .sub(1'b1), .z(dif.re));
  fp64_addsub u_sub_im (.a(u.im), .b(addend.im), .sub(1'b1), .z(dif.im));
  // complex multiplier
  complex_mult u_cmul (.a(mul_in), .b(w), .p(prod));

  always_comb y = (op == OP_FFT) ? dif : prod;

endmodule

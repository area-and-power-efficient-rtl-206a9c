// exchange: 2x2 exchange (crossbar) switch.
//
// out0 = in0 and out1 = in1 when ctrl = 0; the two are crossed when
// ctrl = 1.  It is the "Exchange" box of the paper's architecture figure
// (two multiplexers sharing one control), used on the PE inputs (input
// exchange), on the PE outputs (output exchange), between coefficient banks
// and on the twiddle path (swap of real and imaginary parts).  The element
// type is a parameter.  Combinational.
module exchange #(
  parameter type T = fft_pkg::cplx_t
) (
  input  logic ctrl,
  input  T     in0,
  input  T     in1,
  output T     out0,
  output T     out1
);

  always_comb begin
    out0 = ctrl ? in1 : in0;
    out1 = ctrl ? in0 : in1;
  end

endmodule

// pe_array: the array of reconfigurable PEs with their exchange units.
//
// PE i receives the words read from its two banks (a_rd[i] from the first,
// b_rd[i] from the second) through an input exchange and returns its results
// through an output exchange:
//   u, v = rs ? (b_rd, a_rd) : (a_rd, b_rd)
//   x, y = PE(u, v, w[i])   (CT butterfly for FFT, GS for IFFT)
//   a_wr, b_wr = ws ? (y, x) : (x, y)
// The exchange controls are common to all PEs (Ctrl0 and Ctrl1 of the
// paper's architecture figure).  Combinational.
module pe_array
  import fft_pkg::*;
(
  input  op_e   op,
  input  logic  rs,
  input  logic  ws,
  input  cplx_t a_rd [N_PE],
  input  cplx_t b_rd [N_PE],
  input  cplx_t w    [N_PE],
  output cplx_t a_wr [N_PE],
  output cplx_t b_wr [N_PE]
);

  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    cplx_t u, v, x, y;

    exchange #(.T(cplx_t)) u_in_x (
      .ctrl(rs), .in0(a_rd[i]), .in1(b_rd[i]), .out0(u), .out1(v)
    );

    pe_butterfly u_pe (.op(op), .u(u), .v(v), .w(w[i]), .x(x), .y(y));

    exchange #(.T(cplx_t)) u_out_x (
      .ctrl(ws), .in0(x), .in1(y), .out0(a_wr[i]), .out1(b_wr[i])
    );
  end

endmodule

// coef_addr_gen: coefficient memory address generator (part of the control
// unit).
//
// For step p of stage sg (stage numbered in forward-transform order; the
// inverse transform walks the stages backwards and uses the same addresses)
// every PE reads and writes word Addr0 of its first bank and word Addr1 of
// its second bank:
//   Addr0 = p
//   Addr1 = p                          in the safe stages sg <= S_sg = 1
//   Addr1 = p XOR mask(sg)             in the conflict-prone stages sg >= 2
// where mask(sg) inverts the top sg - S_sg bits of the (logn-3)-bit step
// number.  Addr0 drives banks 0 and 2, Addr1 banks 1 and 3.  The paper's
// address algorithm (Algorithm 3) names this operation Rev(Addr0, S_sg+1, sg)
// and calls it a bit reversal; its own 32-point example (Figure 5) needs the
// bits to be inverted, which is what is done here.
// (Which banks a PE pairs is chosen by config_ctrl: banks 0/2 and 1/3 in
// stage 0, banks 0/1 and 2/3 afterwards.)  Combinational.
module coef_addr_gen
  import fft_pkg::*;
(
  input  logic [LOGN_W-1:0] logn,   // log2 of the transform size, 2..10
  input  logic [LOGN_W-1:0] sg,     // stage, forward order
  input  logic [ADDR_W-1:0] p,      // step within the stage
  output logic [ADDR_W-1:0] addr0,
  output logic [ADDR_W-1:0] addr1
);

  logic [LOGN_W-1:0] sbits;   // address bits in use: log2(n/8)
  logic [LOGN_W-1:0] t;       // conflict-prone depth: sg - S_sg
  logic [ADDR_W-1:0] mask;

  always_comb begin
    sbits = (logn >= LOGN_W'(3)) ? logn - LOGN_W'(3) : '0;
    t     = sg - LOGN_W'(1);
    mask  = '0;
    if (sg >= LOGN_W'(2))
      mask = ((ADDR_W'(1) << t) - ADDR_W'(1)) << (sbits - t);
    addr0 = p;
    addr1 = p ^ mask;
  end

endmodule

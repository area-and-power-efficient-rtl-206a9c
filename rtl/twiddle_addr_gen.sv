// twiddle_addr_gen: twiddle-factor ROM address generator (part of the
// control unit).
//
// Each PE's list of twiddle factors is stored stage after stage in the order
// the PE uses them: one factor for stage 0, one for stage 1 and 2^(sg-1)
// for stage sg >= 2, each used for n/2^(sg+2) consecutive steps.  The
// uncompressed index is therefore
//   j = 0                                   (sg = 0)
//   j = 2^(sg-1) + (p >> (logn-3-(sg-1)))  (sg >= 1)
// and is the same for all PEs (each PE has its own ROM).  With the paper's
// 2x compression only even j >= 2 are stored:
//   addr = j              (j < 2)
//   addr = 1 + j/2        (j >= 2),  odd = j[0]
// For odd j the factor is the stored one times +i or -i; it is -i when the
// pair index j/2 is odd and at least 3 (addr even and >= 4), +i otherwise.
// That rule is a property of the FALCON factor order and holds for every
// entry of both ROMs.  Combinational.
module twiddle_addr_gen
  import fft_pkg::*;
(
  input  logic [LOGN_W-1:0]    logn,
  input  logic [LOGN_W-1:0]    sg,
  input  logic [ADDR_W-1:0]    p,
  output logic [TW_ADDR_W-1:0] addr,
  output logic                 odd,     // derive w from the stored neighbour
  output logic                 minus    // odd factor is stored * (-i)
);

  logic [LOGN_W-1:0]  sbits, t;
  logic [ADDR_W:0]    j;       // uncompressed index, 0 .. S_MAX/(2*N_PE)-1

  always_comb begin
    sbits = (logn >= LOGN_W'(3)) ? logn - LOGN_W'(3) : '0;
    t     = sg - LOGN_W'(1);
    if (sg == '0) j = '0;
    else          j = ((ADDR_W+1)'(1) << t) + (ADDR_W+1)'(p >> (sbits - t));
    if (j < (ADDR_W+1)'(2)) begin
      addr = TW_ADDR_W'(j);
      odd  = 1'b0;
    end else begin
      addr = TW_ADDR_W'(1) + TW_ADDR_W'(j >> 1);
      odd  = j[0];
    end
    minus = odd && (addr >= TW_ADDR_W'(4)) && !addr[0];
  end

endmodule

// twiddle_rom: one compressed twiddle-factor ROM (one per PE).
//
// Holds the twiddle factors one PE needs for every stage of every transform
// size up to 1024, in the order the PE consumes them, with only one factor
// of each (w, w*(+-i)) pair stored (see twiddle_memory for the expansion).
// Entry layout, with uncompressed index j of the PE's list:
//   address 0      : j = 0, used in stage 0 (e^{i pi/4} for both PEs)
//   address 1      : j = 1, used in stage 1
//   address 1 + k  : j = 2k (k >= 1); j = 2k+1 is derived from it
// Each word is {real, imaginary}, binary64.  The contents are loaded from a
// hex file (one 32-digit word per line).  The entries are, for PE p and
// stage sg >= 1 of the 1024-point transform, the FALCON factors
//   exp(i*pi*(2*rev_s(g)+1)/2^(s+1)),  s = sg+1,
// of the butterfly groups g that PE p visits, in visiting order; the
// paper's permutation (its Algorithm 1) produces the same order.  The
// paper implements the ROMs as look-up tables; this is a synchronous ROM
// (data one cycle after the address) so that it is read in the same cycle
// as the coefficient SRAMs.
module twiddle_rom
  import fft_pkg::*;
#(
  parameter string       INIT_FILE = "rtl/twiddle_rom0.hex",
  parameter int unsigned DEPTH     = TW_DEPTH
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic [$clog2(DEPTH)-1:0] addr,
  output cplx_t                    rdata
);

  cplx_t rom [DEPTH];

  initial $readmemh(INIT_FILE, rom);

  always_ff @(posedge clk) begin
    if (en) rdata <= rom[addr];
  end

endmodule

// twiddle_memory: distributed, compressed twiddle-factor memory.
//
// One compressed ROM per PE (ROM_i serves PE_i) followed, per PE, by the
// expansion logic drawn in the paper's architecture figure: an exchange that
// swaps the real and imaginary parts (ctrl "swap") and a sign flip on each
// part (ctrl "neg_re", "neg_im").  A stored factor w gives
//   w          : swap = 0, neg_re = 0, neg_im = 0
//   w * (+i)   : swap = 1, neg_re = 1        (= (-im, re))
//   w * (-i)   : swap = 1, neg_im = 1        (= (im, -re))
// and the inverse transform's conjugate is one more flip of the imaginary
// sign.  The controller computes these controls (config_ctrl).  All PEs
// read the same address in a cycle.  Timing: address in the read cycle,
// factor valid in the following (write) cycle, like the coefficient SRAMs.
module twiddle_memory
  import fft_pkg::*;
(
  input  logic                 clk,
  input  logic                 en,
  input  logic [TW_ADDR_W-1:0] addr,
  input  logic                 swap,
  input  logic                 neg_re,
  input  logic                 neg_im,
  output cplx_t                w [N_PE]
);

  for (genvar g = 0; g < N_PE; g++) begin : g_pe
    localparam string FILE = (g == 0) ? "rtl/twiddle_rom0.hex" : "rtl/twiddle_rom1.hex";
    cplx_t raw;
    fp64_t sw_re, sw_im;

    twiddle_rom #(.INIT_FILE(FILE), .DEPTH(TW_DEPTH)) u_rom (
      .clk(clk), .en(en), .addr(addr), .rdata(raw)
    );

    exchange #(.T(fp64_t)) u_swap (
      .ctrl(swap), .in0(raw.re), .in1(raw.im), .out0(sw_re), .out1(sw_im)
    );

    always_comb begin
      w[g].re = {sw_re[63] ^ neg_re, sw_re[62:0]};
      w[g].im = {sw_im[63] ^ neg_im, sw_im[62:0]};
    end
  end

endmodule

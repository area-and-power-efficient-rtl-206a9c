// coef_memory: distributed coefficient memory, M = 2*n_PE single-port banks.
//
// Bank i (MEM_i) stores complex coefficients; it is built from two
// single-port SRAMs of BANK_DEPTH x 64 bits, MEM_i.real and MEM_i.imag, that
// share address, chip select and write enable.  With the default sizes there
// are 4 banks of 128 complex words, i.e. 8 SRAMs of 1 KB, which holds the
// 512 complex coefficients of the largest (1024-point) transform.
//
// Each bank has its own port (cs, we, addr, wdata, rdata), so all banks can
// be accessed in the same cycle; the conflict-free schedule guarantees that
// no bank is asked for two words at once.  Timing is that of sram_sp: read
// data one cycle after the address, write at the clock edge.
module coef_memory
  import fft_pkg::*;
#(
  parameter int unsigned BANKS = N_BANK,
  parameter int unsigned DEPTH = BANK_DEPTH
) (
  input  logic                     clk,
  input  logic [BANKS-1:0]         cs,
  input  logic [BANKS-1:0]         we,
  input  logic [$clog2(DEPTH)-1:0] addr  [BANKS],
  input  cplx_t                    wdata [BANKS],
  output cplx_t                    rdata [BANKS]
);

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    sram_sp #(.DEPTH(DEPTH), .WIDTH(64)) u_real (
      .clk(clk), .cs(cs[b]), .we(we[b]), .addr(addr[b]),
      .wdata(wdata[b].re), .rdata(rdata[b].re)
    );
    sram_sp #(.DEPTH(DEPTH), .WIDTH(64)) u_imag (
      .clk(clk), .cs(cs[b]), .we(we[b]), .addr(addr[b]),
      .wdata(wdata[b].im), .rdata(rdata[b].im)
    );
  end

endmodule

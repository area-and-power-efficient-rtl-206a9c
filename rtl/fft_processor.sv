// fft_processor: FFT/IFFT-over-the-ring processor for FALCON (top level).
//
// Computes FFT^phi_n or IFFT^phi_n, n = 2^logn, 2 <= n <= 1024, of a
// polynomial held in the coefficient memory, in place, in binary64
// arithmetic.  The n real coefficients a_k are held as n/2 complex words
// a_k + i*a_{k+n/2}.  Two reconfigurable PEs run a conflict-free schedule
// over four single-port banks, one butterfly per PE every two cycles.
//
// Blocks: control_unit (FSM and address/configuration generators),
// coef_memory (4 banks x 128 complex words), twiddle_memory (two compressed
// ROMs and their expansion logic), pe_array (two PEs with input and output
// exchanges) and two bank exchanges that pair banks 0/2 and 1/3 in stage 0.
//
// Data layout (word k, 0 <= k < n/2, before an FFT and after an IFFT):
// bank k / (n/8), address k mod (n/8) for n >= 8; for n = 4 word 0 is bank 0
// address 0 and word 1 is bank 2 address 0; for n = 2 bank 0 address 0.
// After an FFT the words are permuted inside each bank pair (see README);
// the IFFT takes them in that order and returns the natural order.  The
// IFFT result is not divided by n/2.
//
// Host port: while the processor is not busy, host_en/host_we/host_bank/
// host_addr give direct access to one bank word per cycle; read data
// appear on host_rdata one cycle after the request.  The paper does not
// describe how coefficients are loaded, so this port is this design's own.
//
// Timing: pulse start with op_in and logn_in valid; busy stays high for
// 2*(logn-1)*max(n/8,1) cycles; done then rises and stays high until the
// next start.
module fft_processor
  import fft_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  op_e               fft_ifft,   // OP_FFT or OP_IFFT
  input  logic [LOGN_W-1:0] logn,
  output logic              busy,
  output logic              done,
  // host access to the coefficient banks
  input  logic              host_en,
  input  logic              host_we,
  input  logic [BANK_W-1:0] host_bank,
  input  logic [ADDR_W-1:0] host_addr,
  input  cplx_t             host_wdata,
  output cplx_t             host_rdata
);

  // ---------------- control unit ----------------
  op_e                  op;
  logic [ADDR_W-1:0]    addr0, addr1;
  logic [N_BANK-1:0]    ctl_cs, ctl_we;
  logic                 bank_x, rs, ws;
  logic                 tw_en, tw_swap, tw_neg_re, tw_neg_im;
  logic [TW_ADDR_W-1:0] tw_addr;

  control_unit u_ctrl (
    .clk(clk), .rst(rst), .start(start), .op_in(fft_ifft), .logn_in(logn),
    .busy(busy), .done(done), .op(op),
    .addr0(addr0), .addr1(addr1), .cs(ctl_cs), .we(ctl_we), .bank_x(bank_x),
    .rs(rs), .ws(ws),
    .tw_en(tw_en), .tw_addr(tw_addr),
    .tw_swap(tw_swap), .tw_neg_re(tw_neg_re), .tw_neg_im(tw_neg_im)
  );

  // ---------------- coefficient memory ----------------
  logic [N_BANK-1:0] mem_cs, mem_we;
  logic [ADDR_W-1:0] mem_addr  [N_BANK];
  cplx_t             mem_wdata [N_BANK];
  cplx_t             mem_rdata [N_BANK];
  cplx_t             bank_wr   [N_BANK];   // from the PE side
  logic [BANK_W-1:0] host_bank_q;

  coef_memory u_mem (
    .clk(clk), .cs(mem_cs), .we(mem_we), .addr(mem_addr),
    .wdata(mem_wdata), .rdata(mem_rdata)
  );

  always_comb begin
    for (int b = 0; b < N_BANK; b++) begin
      if (busy) begin
        mem_cs[b]    = ctl_cs[b];
        mem_we[b]    = ctl_we[b];
        mem_addr[b]  = b[0] ? addr1 : addr0;   // Addr0: banks 0, 2; Addr1: banks 1, 3
        mem_wdata[b] = bank_wr[b];
      end else begin
        mem_cs[b]    = host_en && (host_bank == BANK_W'(b));
        mem_we[b]    = host_en && host_we && (host_bank == BANK_W'(b));
        mem_addr[b]  = host_addr;
        mem_wdata[b] = host_wdata;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (host_en && !host_we) host_bank_q <= host_bank;
  end
  always_comb host_rdata = mem_rdata[host_bank_q];

  // ---------------- bank exchanges (read and write side) ----------------
  cplx_t a_rd [N_PE], b_rd [N_PE], a_wr [N_PE], b_wr [N_PE];

  exchange #(.T(cplx_t)) u_bank_rx (
    .ctrl(bank_x), .in0(mem_rdata[1]), .in1(mem_rdata[2]), .out0(b_rd[0]), .out1(a_rd[1])
  );
  exchange #(.T(cplx_t)) u_bank_wx (
    .ctrl(bank_x), .in0(b_wr[0]), .in1(a_wr[1]), .out0(bank_wr[1]), .out1(bank_wr[2])
  );

  always_comb begin
    a_rd[0]    = mem_rdata[0];
    b_rd[1]    = mem_rdata[3];
    bank_wr[0] = a_wr[0];
    bank_wr[3] = b_wr[1];
  end

  // ---------------- twiddle memory ----------------
  cplx_t w [N_PE];

  twiddle_memory u_tw (
    .clk(clk), .en(tw_en), .addr(tw_addr),
    .swap(tw_swap), .neg_re(tw_neg_re), .neg_im(tw_neg_im), .w(w)
  );

  // ---------------- PE array ----------------
  pe_array u_pes (
    .op(op), .rs(rs), .ws(ws), .a_rd(a_rd), .b_rd(b_rd), .w(w),
    .a_wr(a_wr), .b_wr(b_wr)
  );

  // The host port belongs to the host only while the processor is idle.
  assert property (@(posedge clk) disable iff (rst) busy |-> !host_en)
    else $error("host access while the processor is busy");

endmodule

// config_ctrl: configuration control of the control unit.
//
// Turns the operation (FFT or IFFT), the size, the stage/step counters and
// the read/write phase into the datapath controls:
//   bank_x  - exchange between banks 1 and 2 (stage 0 pairs banks 0/2, 1/3)
//   rs      - PE input exchange  (u taken from the second bank)
//   ws      - PE output exchange (x written to the second bank)
//   tw_swap, tw_neg_re, tw_neg_im - twiddle expansion and conjugation
//   cs, we  - bank chip selects and write enables
// Exchange rules of the conflict-free schedule, with t = sg - 1 and
// b = logn - 3 (the paper's Algorithm 2):
//   inex = p[b - t]       in the conflict-prone stages sg >= 2 (input exchange)
//   ex   = p[b - t - 1]   in stages 1 .. last-1 (output exchange; EX_Bit)
// For the forward transform rs = inex and ws = inex ^ ex; the inverse
// transform mirrors the forward one stage by stage, so its roles swap:
// rs = inex ^ ex and ws = inex.  (Algorithm 2 as printed exchanges inputs
// when "gp is even and sg <= S_sg" and writes x back to the first bank
// unless EX_Flag; the paper's 32-point example, Figure 5, follows the rules
// above, which are the ones that keep every access conflict-free.)
// For n = 4 only PE0 works: banks 1 and 3 are not selected.  Combinational.
module config_ctrl
  import fft_pkg::*;
(
  input  op_e               op,
  input  logic [LOGN_W-1:0] logn,
  input  logic [LOGN_W-1:0] sg,
  input  logic [ADDR_W-1:0] p,
  input  logic              active,   // a butterfly step is in progress
  input  logic              wr_phase, // 0: read cycle, 1: write cycle
  input  logic              tw_odd,
  input  logic              tw_minus,
  output logic              bank_x,
  output logic              rs,
  output logic              ws,
  output logic              tw_swap,
  output logic              tw_neg_re,
  output logic              tw_neg_im,
  output logic [N_BANK-1:0] cs,
  output logic [N_BANK-1:0] we
);

  logic [LOGN_W-1:0] nst, sbits, t;
  logic              inex, ex;
  logic [LOGN_W-1:0] in_bit, ex_bit;

  always_comb begin
    nst   = logn - LOGN_W'(1);
    sbits = (logn >= LOGN_W'(3)) ? logn - LOGN_W'(3) : '0;
    t     = sg - LOGN_W'(1);
    in_bit = sbits - t;
    ex_bit = sbits - t - LOGN_W'(1);
    inex  = (sg >= LOGN_W'(2) && in_bit < LOGN_W'(ADDR_W)) ? p[in_bit[2:0]] : 1'b0;
    ex    = (sg >= LOGN_W'(1) && sg + LOGN_W'(2) <= nst && ex_bit < LOGN_W'(ADDR_W))
            ? p[ex_bit[2:0]] : 1'b0;
    if (op == OP_FFT) begin
      rs = inex;
      ws = inex ^ ex;
    end else begin
      rs = inex ^ ex;
      ws = inex;
    end
    bank_x    = (sg == '0);
    tw_swap   = tw_odd;
    tw_neg_re = tw_odd && !tw_minus;
    tw_neg_im = (tw_odd && tw_minus) ^ (op == OP_IFFT);
    cs = active ? {N_BANK{1'b1}} : '0;
    if (active && logn == LOGN_W'(2)) cs = N_BANK'(4'b0101);  // n = 4: PE1 idle
    we = wr_phase ? cs : '0;
  end

endmodule

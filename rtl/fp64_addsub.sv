// fp64_addsub: IEEE-754 binary64 adder/subtractor, combinational.
//
// Computes z = a + b (sub = 0) or z = a - b (sub = 1) with round to nearest,
// ties to even.  Subnormal inputs and results are handled (gradual
// underflow); infinities and NaNs follow IEEE-754 (inf - inf gives the
// canonical quiet NaN 0x7FF8_0000_0000_0000, any NaN input gives the same
// canonical NaN).  An exact zero difference is +0, and -0 + -0 is -0.
//
// How it works: the operand of larger magnitude is put first, the other
// significand is aligned right with three extra bits (guard, round, sticky),
// the two are added or subtracted, the sum is normalised (one step right or
// a leading-zero shift left limited by the exponent so that a result below
// the normal range stays subnormal) and rounded.  Rounding adds one to the
// packed {exponent, fraction} word so that a carry out of the fraction moves
// into the exponent, which also produces infinity on overflow.
//
// The paper states only that the PE adders are IEEE-754 double-precision
// units and gives no internal structure, so this is a plain single-cycle
// (unpipelined, as in the paper) implementation of that function.
module fp64_addsub
  import fft_pkg::*;
(
  input  fp64_t a,
  input  fp64_t b,
  input  logic  sub,
  output fp64_t z
);

  localparam fp64_t QNAN = 64'h7FF8_0000_0000_0000;

  logic        sa, sb;
  logic [10:0] ea, eb;
  logic [51:0] fa, fb;

  always_comb begin
    sa = a[63];
    sb = b[63] ^ sub;
    ea = a[62:52];
    eb = b[62:52];
    fa = a[51:0];
    fb = b[51:0];
  end

  // Order operands by magnitude.
  logic        swap;
  logic        sx, sy;
  logic [10:0] ex, ey;           // effective exponents (0 read as 1)
  logic [52:0] mx, my;           // significands with hidden bit
  always_comb begin
    swap = {ea, fa} < {eb, fb};
    sx   = swap ? sb : sa;
    sy   = swap ? sa : sb;
    ex   = swap ? ((eb == 0) ? 11'd1 : eb) : ((ea == 0) ? 11'd1 : ea);
    ey   = swap ? ((ea == 0) ? 11'd1 : ea) : ((eb == 0) ? 11'd1 : eb);
    mx   = swap ? {eb != 0, fb} : {ea != 0, fa};
    my   = swap ? {ea != 0, fa} : {eb != 0, fb};
  end

  // Align the smaller operand: 53 bits + guard, round, sticky = 56 bits.
  logic [10:0]  dexp;
  logic [55:0]  ax, ay;
  logic [111:0] ysh;
  always_comb begin
    dexp = ex - ey;
    ax   = {mx, 3'b000};
    ysh  = {my, 3'b000, 56'd0} >> dexp;
    if (dexp > 11'd56) begin
      ay = {55'd0, |my};
    end else begin
      ay  = {ysh[111:57], ysh[56] | (|ysh[55:0])};
    end
  end

  // Add or subtract, normalise, round.
  logic        eff_sub;
  logic [56:0] sum;
  logic [55:0] nrm;
  logic [11:0] e_cur;
  logic [5:0]  lz;
  logic [11:0] shl;
  logic [10:0] e_field;
  logic [62:0] packed_mag;
  logic        rnd_up;
  logic [62:0] mag;

  always_comb begin
    eff_sub = sx ^ sy;
    sum     = eff_sub ? ({1'b0, ax} - {1'b0, ay}) : ({1'b0, ax} + {1'b0, ay});
    e_cur   = {1'b0, ex};
    if (sum[56]) begin
      nrm   = {sum[56:2], sum[1] | sum[0]};
      e_cur = e_cur + 12'd1;
    end else begin
      nrm = sum[55:0];
    end
    // leading zeros of nrm (bit 55 is the hidden-bit position)
    lz = 6'd56;
    for (int i = 0; i <= 55; i++) begin
      if (nrm[i]) lz = 6'(55 - i);
    end
    // never shift below exponent 1
    shl = (12'(lz) < e_cur - 12'd1) ? 12'(lz) : (e_cur - 12'd1);
    nrm = nrm << shl;
    e_cur = e_cur - shl;
    e_field = nrm[55] ? e_cur[10:0] : 11'd0;
    packed_mag = {e_field, nrm[54:3]};
    // round to nearest even: guard = nrm[2], sticky = nrm[1] | nrm[0]
    rnd_up = nrm[2] & (nrm[1] | nrm[0] | nrm[3]);
    mag    = packed_mag + 63'(rnd_up);
  end

  always_comb begin
    if ((ea == 11'h7FF && fa != 0) || (eb == 11'h7FF && fb != 0)) begin
      z = QNAN;
    end else if (ea == 11'h7FF || eb == 11'h7FF) begin
      if (ea == 11'h7FF && eb == 11'h7FF && sa != sb) z = QNAN;
      else if (ea == 11'h7FF) z = {sa, 11'h7FF, 52'd0};
      else z = {sb, 11'h7FF, 52'd0};
    end else if (sum == 57'd0) begin
      z = {sa & sb, 63'd0};
    end else if (e_cur >= 12'd2047) begin
      z = {sx, 11'h7FF, 52'd0};
    end else begin
      z = {sx, mag};
    end
  end

endmodule

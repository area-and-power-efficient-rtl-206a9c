// fp64_mul: IEEE-754 binary64 multiplier, combinational.
//
// Computes z = a * b with round to nearest, ties to even.  Subnormal inputs
// are normalised first and results below the normal range are denormalised
// (gradual underflow); overflow gives infinity, 0 * inf and any NaN input
// give the canonical quiet NaN 0x7FF8_0000_0000_0000.
//
// How it works: each significand (hidden bit included) is shifted left by
// its leading-zero count so that both have their top bit set, the 53x53
// product is taken, normalised by at most one position, shifted right when
// the exponent falls below 1, and rounded by adding one to the packed
// {exponent, fraction} word.
//
// The paper gives only the function (IEEE-754 double-precision multiplier,
// four per PE, no pipelining); the structure here is the simplest single-
// cycle one.
module fp64_mul
  import fft_pkg::*;
(
  input  fp64_t a,
  input  fp64_t b,
  output fp64_t z
);

  localparam fp64_t QNAN = 64'h7FF8_0000_0000_0000;

  logic        sz;
  logic [10:0] ea, eb;
  logic [51:0] fa, fb;
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    sz = a[63] ^ b[63];
    ea = a[62:52];
    eb = b[62:52];
    fa = a[51:0];
    fb = b[51:0];
    a_nan  = (ea == 11'h7FF) && (fa != 0);
    b_nan  = (eb == 11'h7FF) && (fb != 0);
    a_inf  = (ea == 11'h7FF) && (fa == 0);
    b_inf  = (eb == 11'h7FF) && (fb == 0);
    a_zero = (ea == 0) && (fa == 0);
    b_zero = (eb == 0) && (fb == 0);
  end

  // Normalise significands (handles subnormal inputs).
  logic [52:0] ma, mb;
  logic [5:0]  lza, lzb;
  logic signed [13:0] xa, xb;   // unbiased-plus-bias exponents, may go below 1
  always_comb begin
    ma  = {ea != 0, fa};
    mb  = {eb != 0, fb};
    lza = 6'd0;
    lzb = 6'd0;
    for (int i = 0; i <= 52; i++) begin
      if (ma[i]) lza = 6'(52 - i);
      if (mb[i]) lzb = 6'(52 - i);
    end
    ma = ma << lza;
    mb = mb << lzb;
    xa = 14'(signed'({1'b0, ((ea == 0) ? 11'd1 : ea)})) - 14'(signed'({1'b0, lza}));
    xb = 14'(signed'({1'b0, ((eb == 0) ? 11'd1 : eb)})) - 14'(signed'({1'b0, lzb}));
  end

  logic [105:0] prod;
  logic [105:0] pn;
  logic signed [13:0] e_res;
  logic [52:0]  m;
  logic         g, st;
  logic [13:0]  sh;
  logic [109:0] wide;
  logic [62:0]  packed_mag;
  logic [10:0]  e_field;
  logic         rnd_up;
  logic [62:0]  mag;

  always_comb begin
    prod  = ma * mb;                       // in [2^104, 2^106)
    pn    = prod[105] ? prod : (prod << 1);
    e_res = xa + xb - 14'sd1023 + (prod[105] ? 14'sd1 : 14'sd0);
    m     = pn[105:53];
    g     = pn[52];
    st    = |pn[51:0];
    e_field = 11'd0;
    sh      = 14'd0;
    wide    = {m, g, st, 55'd0};
    if (e_res >= 14'sd1) begin
      e_field = e_res[10:0];
    end else begin
      // denormalise: shift {m, g, st} right by 1 - e_res
      sh   = 14'(14'sd1 - e_res);
      if (sh > 14'd56) begin
        st = (|m) | g | st;
        m  = 53'd0;
        g  = 1'b0;
      end else begin
        wide = wide >> sh;
        m    = wide[109:57];
        g    = wide[56];
        st   = wide[55] | (|wide[54:0]);
      end
    end
    packed_mag = {e_field, m[51:0]};
    rnd_up     = g & (st | m[0]);
    mag        = packed_mag + 63'(rnd_up);
  end

  always_comb begin
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      z = QNAN;
    end else if (a_inf || b_inf) begin
      z = {sz, 11'h7FF, 52'd0};
    end else if (a_zero || b_zero) begin
      z = {sz, 63'd0};
    end else if (e_res >= 14'sd2047) begin
      z = {sz, 11'h7FF, 52'd0};
    end else begin
      z = {sz, mag};   // a rounding carry may reach 0x7FF0.. = infinity
    end
  end

endmodule

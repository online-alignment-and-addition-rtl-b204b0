// normalize_round: turns the tree's (max exponent, aligned sum) into a
// floating-point word of the input format.
//
// The sum o is a W-bit two's complement integer whose LSB weighs
// 2^(lambda - bias - MW - G). The unit
//   1. takes sign and magnitude of o,
//   2. counts leading zeros of the magnitude and shifts it left so that the
//      leading one reaches the top bit, but never further than keeps the
//      biased exponent at 1 or above (so tiny results become subnormals),
//   3. rounds the MW fraction bits below the leading one to nearest, ties to
//      even, using the next bit as round bit and the OR of the rest as
//      sticky bit, and renormalises if rounding carries out,
//   4. returns +/-infinity when the exponent overflows, +0 for an exact zero
//      sum, and NaN / infinity when the special-value flags say so
//      (NaN input, or +inf and -inf both present, gives the quiet NaN).
// With the normalisation limit lim = lambda + log2(N), the shift is
// s = min(lzc, lim) and the biased exponent before rounding is
// lim - s + (top bit after the shift).
//
// Interface: lam_i, o_i, special-value flags in; word_o out. Combinational.
//
// The paper names this step (normalize and round the final sum) without
// describing it; everything here is a conventional design choice:
// round-to-nearest-even, IEEE-style infinity/NaN and subnormal results.
module normalize_round #(
  parameter int unsigned EW   = fp_pkg::BF16_EW,
  parameter int unsigned MW   = fp_pkg::BF16_MW,
  parameter int unsigned G    = fp_pkg::DEFAULT_GUARD,
  parameter int unsigned LOGN = 5,
  parameter int unsigned W    = 2 + LOGN + MW + G
) (
  input  logic [EW-1:0]  lam_i,
  input  logic [W-1:0]   o_i,
  input  logic           any_nan_i,
  input  logic           pos_inf_i,
  input  logic           neg_inf_i,
  output logic [EW+MW:0] word_o
);

  localparam int unsigned XW = EW + $clog2(W) + 2;   // internal exponent width
  localparam int unsigned LZW = $clog2(W + 1);

  logic            neg;
  logic [W-1:0]    mag;
  logic [LZW-1:0]  lzc;
  logic [XW-1:0]   lim, shamt, epre, efin;
  logic [W-1:0]    sh;
  logic            top, guard, sticky, up;
  logic [MW-1:0]   mant, mfin;
  logic [MW+1:0]   rsig;

  if (G < 1) begin : g_bad_guard
    $error("normalize_round: at least one guard bit is required");
  end

  // sign and magnitude
  always_comb begin
    neg = o_i[W-1];
    mag = neg ? (~o_i + W'(1)) : o_i;
  end

  // leading-zero count
  always_comb begin
    lzc = LZW'(W);
    for (int i = 0; i < W; i++)
      if (mag[i]) lzc = LZW'(W - 1 - i);
  end

  // limited normalisation shift, round to nearest even
  always_comb begin
    lim    = XW'(lam_i) + XW'(LOGN);
    shamt  = (XW'(lzc) <= lim) ? XW'(lzc) : lim;
    sh     = mag << shamt;
    top    = sh[W-1];
    mant   = sh[W-2 -: MW];
    guard  = sh[W-2-MW];
    sticky = |sh[W-3-MW:0];
    epre   = lim - shamt;
    up     = guard & (sticky | mant[0]);
    rsig   = {1'b0, top, mant} + (MW+2)'(up);
    if (rsig[MW+1]) begin
      efin = epre + XW'(2);
      mfin = rsig[MW:1];
    end else begin
      efin = epre + XW'(rsig[MW]);
      mfin = rsig[MW-1:0];
    end
  end

  // result selection
  always_comb begin
    if (any_nan_i || (pos_inf_i && neg_inf_i))
      word_o = {1'b0, {EW{1'b1}}, MW'(1) << (MW - 1)};
    else if (pos_inf_i)
      word_o = {1'b0, {EW{1'b1}}, {MW{1'b0}}};
    else if (neg_inf_i)
      word_o = {1'b1, {EW{1'b1}}, {MW{1'b0}}};
    else if (mag == '0)
      word_o = '0;
    else if (efin >= XW'({EW{1'b1}}))
      word_o = {neg, {EW{1'b1}}, {MW{1'b0}}};
    else
      word_o = {neg, efin[EW-1:0], mfin};
  end

endmodule

// fp_unpack: turns one floating-point word into the (exponent, signed
// fraction) pair that enters the align-and-add tree.
//
// A word is {sign, exponent field[EW], fraction field[MW]}. The fraction is
// extended with its hidden bit (1 for normal numbers, 0 when the exponent
// field is 0), shifted left by G guard positions, and negated when the sign
// is set, so the tree only ever adds two's complement numbers, as the
// adder's algorithm assumes. Subnormals keep their value by using an
// effective exponent of 1 in place of the field value 0; zero therefore
// enters as (1, 0). Infinity and NaN encodings (all-ones exponent field) are
// reported on is_inf / is_nan and enter the tree as a zero term, so that
// the normaliser can override the result.
//
// Interface: word_i in, exp_o / frac_o / flags out. Purely combinational.
//
// Following the paper: the exponent plus two's complement fraction form.
// Own choices: subnormal handling, the G guard bits, and the zero term
// inserted for infinity/NaN inputs.
module fp_unpack #(
  parameter int unsigned EW = fp_pkg::BF16_EW,
  parameter int unsigned MW = fp_pkg::BF16_MW,
  parameter int unsigned G  = fp_pkg::DEFAULT_GUARD,
  parameter int unsigned W  = fp_pkg::sum_width(32, MW, G)
) (
  input  logic [EW+MW:0]       word_i,
  output logic [EW-1:0]        exp_o,
  output logic signed [W-1:0]  frac_o,
  output logic                 sign_o,
  output logic                 is_inf_o,
  output logic                 is_nan_o
);

  logic [EW-1:0] efield;
  logic [MW-1:0] mfield;
  logic          special;
  logic [W-1:0]  mag;

  always_comb begin
    sign_o   = word_i[EW+MW];
    efield   = word_i[EW+MW-1:MW];
    mfield   = word_i[MW-1:0];
    special  = &efield;
    is_inf_o = special && (mfield == '0);
    is_nan_o = special && (mfield != '0);

    // hidden bit, fraction, then G guard zeros
    mag = W'({(efield != '0), mfield}) << G;
    if (special) mag = '0;

    exp_o  = (efield == '0 || special) ? EW'(1) : efield;
    frac_o = sign_o ? -$signed(mag) : $signed(mag);
  end

endmodule

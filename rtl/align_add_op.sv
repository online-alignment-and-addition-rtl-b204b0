// align_add_op: the radix-R online align-and-add operator.
//
// Each of the R inputs is a pair (lambda_k, o_k): an exponent and a two's
// complement partial sum whose LSB weight is tied to that exponent. The
// operator computes
//     lambda = max_k lambda_k
//     o      = sum_k ( o_k >>> (lambda - lambda_k) )
// i.e. it finds the local maximum exponent, subtracts it from every input
// exponent, aligns every partial sum by an arithmetic right shift of that
// difference, and adds the aligned values. For R = 2 this is the paper's
// associative operator; for larger R it is the baseline align-and-add of R
// terms, which the paper uses as a higher-radix node of the same tree.
//
// Bits shifted out are dropped (arithmetic shift = round toward minus
// infinity); a difference of W or more leaves only the sign (0 or -1).
// The adder keeps W bits: the caller sizes W so that the sum of all N terms
// of the whole tree cannot overflow, so no width grows inside the operator.
//
// Interface: packed arrays lam_i[R] / o_i[R] in, lam_o / o_o out.
// Purely combinational; pipeline registers are placed by the tree.
//
// Following the paper: max, per-input subtract, per-input shift, one
// multi-operand add (Fig. 2 insets). Own choices: the fixed width W, the
// truncating shift and the saturation of large shift amounts.
module align_add_op #(
  parameter int unsigned R  = 2,
  parameter int unsigned EW = fp_pkg::BF16_EW,
  parameter int unsigned W  = fp_pkg::sum_width(32, fp_pkg::BF16_MW, fp_pkg::DEFAULT_GUARD)
) (
  input  logic [R-1:0][EW-1:0] lam_i,
  input  logic [R-1:0][W-1:0]  o_i,
  output logic [EW-1:0]        lam_o,
  output logic [W-1:0]         o_o
);

  logic [EW-1:0]        lmax;
  logic [R-1:0][EW-1:0] diff;
  logic [R-1:0][W-1:0]  aligned;
  logic [W-1:0]         acc;

  // local maximum exponent
  always_comb begin
    lmax = lam_i[0];
    for (int k = 1; k < R; k++)
      if (lam_i[k] > lmax) lmax = lam_i[k];
  end

  // exponent differences and alignment shifts
  always_comb begin
    for (int k = 0; k < R; k++) begin
      diff[k] = lmax - lam_i[k];
      if (32'(diff[k]) >= W)
        aligned[k] = {W{o_i[k][W-1]}};
      else
        aligned[k] = W'($signed(o_i[k]) >>> diff[k]);
    end
  end

  // multi-operand addition of the aligned partial sums
  always_comb begin
    acc = '0;
    for (int k = 0; k < R; k++) acc = acc + aligned[k];
  end

  assign lam_o = lmax;
  assign o_o   = acc;

endmodule

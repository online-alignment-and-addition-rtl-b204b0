// align_add_tree: a mixed-radix tree of align-and-add operators.
//
// N (exponent, two's complement fraction) pairs enter at the leaves. Level l
// groups RADIX[l] neighbouring results of level l-1 into one align_add_op,
// so the tree has LEVELS levels and the product of the radices must equal N.
// RADIX holds up to MAX_LEVELS (8) radices; the list ends at the first 1. The
// root delivers the maximum exponent of all terms and the sum of all
// fractions aligned to it. Because the operator is associative every radix
// list computes the same maximum; the sum differs only in which bits the
// intermediate right shifts drop. The radix list names the configuration the
// way the paper does: '{0: 8, 1: 2, 2: 2, default: 1} is the "8-2-2" adder (radix-8 operators at the
// leaves, then two radix-2 levels), '{0: 32, default: 1} is the single radix-32 operator of
// the conventional max-then-align-then-add design.
//
// LEVEL_REG[l] = 1 puts a register bank after level l. The latency in clock
// cycles is the number of ones in LEVEL_REG; a new set of N terms can be
// accepted every cycle. Registers carry no reset (the valid bit travels
// beside the tree, in the top level).
//
// Interface: lam_i / o_i (packed, N entries) in, lam_o / o_o out, clk_i.
//
// Following the paper: the tree of operators and the per-level radix list.
// Own choices: the register after each level (the paper lets HLS place its
// pipeline registers) and the single width W used on every level.
module align_add_tree #(
  parameter int unsigned N         = 32,
  parameter int unsigned EW        = fp_pkg::BF16_EW,
  parameter int unsigned W         = fp_pkg::sum_width(32, fp_pkg::BF16_MW, fp_pkg::DEFAULT_GUARD),
  parameter fp_pkg::radix_t RADIX  = '{0: 8, 1: 2, 2: 2, default: 1},
  parameter bit [fp_pkg::MAX_LEVELS-1:0] LEVEL_REG = '1
) (
  input  logic                 clk_i,
  input  logic [N-1:0][EW-1:0] lam_i,
  input  logic [N-1:0][W-1:0]  o_i,
  output logic [EW-1:0]        lam_o,
  output logic [W-1:0]         o_o
);

  localparam int unsigned LEVELS = fp_pkg::num_levels(RADIX);

  if (LEVELS == 0 || fp_pkg::prefix_prod(RADIX, LEVELS) != N) begin : g_bad_config
    $error("align_add_tree: product of RADIX must equal N");
  end

  for (genvar l = 0; l < LEVELS; l++) begin : lvl
    localparam int unsigned NIN  = N / fp_pkg::prefix_prod(RADIX, l);
    localparam int unsigned R    = RADIX[l];
    localparam int unsigned NOUT = NIN / R;

    logic [NIN-1:0][EW-1:0]  lam_in;
    logic [NIN-1:0][W-1:0]   o_in;
    logic [NOUT-1:0][EW-1:0] lam_c, lam_q;
    logic [NOUT-1:0][W-1:0]  o_c, o_q;

    if (l == 0) begin : g_from_inputs
      assign lam_in = lam_i;
      assign o_in   = o_i;
    end else begin : g_from_level
      assign lam_in = lvl[l-1].lam_q;
      assign o_in   = lvl[l-1].o_q;
    end

    for (genvar k = 0; k < NOUT; k++) begin : node
      align_add_op #(.R(R), .EW(EW), .W(W)) u_op (
        .lam_i (lam_in[k*R +: R]),
        .o_i   (o_in[k*R +: R]),
        .lam_o (lam_c[k]),
        .o_o   (o_c[k])
      );
    end

    if (LEVEL_REG[l]) begin : g_reg
      always_ff @(posedge clk_i) begin
        lam_q <= lam_c;
        o_q   <= o_c;
      end
    end else begin : g_wire
      assign lam_q = lam_c;
      assign o_q   = o_c;
    end
  end

  assign lam_o = lvl[LEVELS-1].lam_q[0];
  assign o_o   = lvl[LEVELS-1].o_q[0];

endmodule

// online_fp_adder: pipelined N-term fused floating-point adder using online
// alignment and addition.
//
// The adder sums N floating-point numbers of one format and rounds the
// result once. Instead of first finding the maximum exponent of all N terms
// and only then aligning and adding every fraction, it feeds the terms into
// a tree of align-and-add operators: every node finds the maximum of its own
// inputs' exponents, aligns its inputs' partial sums to it and adds them, so
// maximum search, alignment and addition proceed together, level by level.
//
//   terms_i[N] -> fp_unpack x N -> align_add_tree (radix list RADIX)
//              -> normalize_round -> [output register] -> sum_o
//
// Special-value flags (NaN, +inf, -inf seen among the inputs) and the valid
// bit travel beside the tree in a delay line of the same latency.
//
// Defaults: 32 BFloat16 terms, configuration 8-2-2, a register after each
// of the three tree levels and one after rounding: latency 4 cycles, one
// new set of terms per cycle, no back-pressure. valid_o follows valid_i by
// exactly the latency. rst_ni (asynchronous, active low) clears only the
// valid pipeline; data registers are not reset.
//
// Interface: clk_i, rst_ni, valid_i, terms_i[N] (packed words
// {sign, exponent, fraction}), valid_o, sum_o.
//
// Following the paper: the 32-term BFloat16 adder, the 8-2-2 radix list
// (its lowest-power 32-term BFloat16 configuration) and a four-stage
// pipeline. Own choices: where the registers sit, the guard bits, the
// special-value handling and the rounding mode.
module online_fp_adder #(
  parameter int unsigned N         = 32,
  parameter int unsigned EW        = fp_pkg::BF16_EW,
  parameter int unsigned MW        = fp_pkg::BF16_MW,
  parameter int unsigned G         = fp_pkg::DEFAULT_GUARD,
  parameter fp_pkg::radix_t RADIX  = '{0: 8, 1: 2, 2: 2, default: 1},
  parameter bit [fp_pkg::MAX_LEVELS-1:0] LEVEL_REG = '1,
  parameter bit          OUT_REG   = 1'b1
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic                    valid_i,
  input  logic [N-1:0][EW+MW:0]   terms_i,
  output logic                    valid_o,
  output logic [EW+MW:0]          sum_o
);

  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned W    = fp_pkg::sum_width(N, MW, G);
  localparam int unsigned LEVELS = fp_pkg::num_levels(RADIX);
  localparam int unsigned TLAT = fp_pkg::popcount(32'(LEVEL_REG) & ((32'd1 << LEVELS) - 1));

  // special-value flags and valid bit that travel beside the tree
  typedef struct packed {
    logic valid;
    logic nan;
    logic pinf;
    logic ninf;
  } side_t;

  logic [N-1:0][EW-1:0] lam;
  logic [N-1:0][W-1:0]  frac;
  logic [N-1:0]         sgn, inf, nan;
  side_t                side_in, side_out;
  logic [EW-1:0]        lam_root;
  logic [W-1:0]         o_root;
  logic [EW+MW:0]       word;

  for (genvar i = 0; i < N; i++) begin : g_unpack
    fp_unpack #(.EW(EW), .MW(MW), .G(G), .W(W)) u_unpack (
      .word_i   (terms_i[i]),
      .exp_o    (lam[i]),
      .frac_o   (frac[i]),
      .sign_o   (sgn[i]),
      .is_inf_o (inf[i]),
      .is_nan_o (nan[i])
    );
  end

  always_comb begin
    side_in.valid = valid_i;
    side_in.nan   = |nan;
    side_in.pinf  = |(inf & ~sgn);
    side_in.ninf  = |(inf & sgn);
  end

  align_add_tree #(
    .N(N), .EW(EW), .W(W), .RADIX(RADIX), .LEVEL_REG(LEVEL_REG)
  ) u_tree (
    .clk_i (clk_i),
    .lam_i (lam),
    .o_i   (frac),
    .lam_o (lam_root),
    .o_o   (o_root)
  );

  // side-band delay line matching the tree latency
  if (TLAT == 0) begin : g_side_wire
    assign side_out = side_in;
  end else begin : g_side_pipe
    side_t stage [TLAT];
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        for (int s = 0; s < TLAT; s++) stage[s] <= '0;
      end else begin
        stage[0] <= side_in;
        for (int s = 1; s < TLAT; s++) stage[s] <= stage[s-1];
      end
    end
    assign side_out = stage[TLAT-1];
  end

  normalize_round #(.EW(EW), .MW(MW), .G(G), .LOGN(LOGN), .W(W)) u_norm (
    .lam_i     (lam_root),
    .o_i       (o_root),
    .any_nan_i (side_out.nan),
    .pos_inf_i (side_out.pinf),
    .neg_inf_i (side_out.ninf),
    .word_o    (word)
  );

  if (OUT_REG) begin : g_out_reg
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) valid_o <= 1'b0;
      else         valid_o <= side_out.valid;
    end
    always_ff @(posedge clk_i) sum_o <= word;
  end else begin : g_out_wire
    assign valid_o = side_out.valid;
    assign sum_o   = word;
  end

endmodule

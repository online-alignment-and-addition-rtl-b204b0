// fp_pkg: formats and elaboration-time helpers shared by the multi-term adder.
//
// The five floating-point formats the adder is built for are listed as
// (exponent width, fraction width) pairs: FP32 (8,23), BFloat16 (8,7),
// FP8_e4m3 (4,3), FP8_e5m2 (5,2) and FP8_e6m1 (6,1). Every format is treated
// the IEEE-754 way: bias 2^(EW-1)-1, exponent field 0 for zero and
// subnormals, all-ones exponent field for infinity (fraction 0) and NaN.
// (The OCP FP8_e4m3 encoding, which has no infinity, is not modelled.)
//
// The helper functions compute, at elaboration time, the internal datapath
// width of the adder and the shape of a mixed-radix operator tree.
package fp_pkg;

  // Exponent / fraction widths of the supported formats.
  localparam int unsigned FP32_EW     = 8;
  localparam int unsigned FP32_MW     = 23;
  localparam int unsigned BF16_EW     = 8;
  localparam int unsigned BF16_MW     = 7;
  localparam int unsigned E4M3_EW     = 4;
  localparam int unsigned E4M3_MW     = 3;
  localparam int unsigned E5M2_EW     = 5;
  localparam int unsigned E5M2_MW     = 2;
  localparam int unsigned E6M1_EW     = 6;
  localparam int unsigned E6M1_MW     = 1;

  // Radix list of an operator tree: entry l is the radix of level l (level 0
  // at the leaves); entries equal to 1 after the last level mark unused levels.
  localparam int unsigned MAX_LEVELS = 8;
  typedef int unsigned radix_t [MAX_LEVELS];

  // Extra fraction bits kept below the LSB of the largest term.
  localparam int unsigned DEFAULT_GUARD = 3;

  // Width of the two's complement partial sums carried through the tree:
  // sign + growth bits for N terms + hidden bit + fraction + guard bits.
  function automatic int unsigned sum_width(int unsigned n, int unsigned mw,
                                            int unsigned g);
    return 2 + $clog2(n) + mw + g;
  endfunction

  // Number of tree levels of a radix list (entries before the first 1).
  function automatic int unsigned num_levels(radix_t r);
    int unsigned n;
    n = 0;
    for (int i = MAX_LEVELS - 1; i >= 0; i--)
      if (r[i] <= 1) n = i;
    if (r[MAX_LEVELS-1] > 1) n = MAX_LEVELS;
    return n;
  endfunction

  // Product of the radices of levels 0 .. l-1.
  function automatic int unsigned prefix_prod(radix_t r, int unsigned l);
    int unsigned p;
    p = 1;
    for (int unsigned i = 0; i < l; i++) p = p * r[i];
    return p;
  endfunction

  // Number of set bits of a level-register mask (pipeline latency of the tree).
  function automatic int unsigned popcount(logic [31:0] v);
    int unsigned c;
    c = 0;
    for (int i = 0; i < 32; i++) c += int'(v[i]);
    return c;
  endfunction

endpackage

// adder_check: reusable self-checking harness for one configuration of
// online_fp_adder (term count, format, radix list, register placement).
// It streams NV random term sets of all stimulus classes of
// fp_ref_pkg::gen_vector, one per cycle, compares every result with
// fp_ref_pkg::ref_adder, checks the latency (number of tree levels with a
// register plus the output register), and raises done when finished.
module adder_check #(
  parameter string       NAME   = "bf16_32_8-2-2",
  parameter int unsigned N      = 32,
  parameter int unsigned EW     = 8,
  parameter int unsigned MW     = 7,
  parameter fp_pkg::radix_t RADIX = '{0: 8, 1: 2, 2: 2, default: 1},
  parameter bit [fp_pkg::MAX_LEVELS-1:0] LEVEL_REG = '1,
  parameter int unsigned NV     = 400
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  import fp_ref_pkg::*;

  localparam int G   = fp_pkg::DEFAULT_GUARD;
  localparam int LEVELS = fp_pkg::num_levels(RADIX);
  localparam int LAT = fp_pkg::popcount(32'(LEVEL_REG) & ((32'd1 << LEVELS) - 1)) + 1;

  logic                  rst_n, valid_i, valid_o;
  logic [N-1:0][EW+MW:0] terms;
  logic [EW+MW:0]        sum;
  int                    cycle;
  word_t                 exp_word[$];
  int                    exp_cycle[$];

  online_fp_adder #(.N(N), .EW(EW), .MW(MW), .G(G), .RADIX(RADIX),
                    .LEVEL_REG(LEVEL_REG)) dut (
    .clk_i(clk), .rst_ni(rst_n), .valid_i(valid_i), .terms_i(terms),
    .valid_o(valid_o), .sum_o(sum));

  initial cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    #1;
    if (rst_n && valid_o) begin
      checks++;
      if (exp_word.size() == 0) begin
        failures++;
      end else begin
        word_t e; int c;
        e = exp_word.pop_front();
        c = exp_cycle.pop_front();
        if (word_t'(sum) != e || cycle - c != LAT) begin
          failures++;
          if (failures < 5) $display("FAIL %s: got %h exp %h latency %0d", NAME, sum, e, cycle - c);
        end
      end
    end
  end

  initial begin
    word_t v[];
    int rad[];
    checks = 0; failures = 0; done = 0;
    rad = new[LEVELS];
    foreach (rad[l]) rad[l] = int'(RADIX[l]);
    rst_n = 0; valid_i = 0; terms = '0;
    repeat (2) @(posedge clk);
    #2 rst_n = 1;
    for (int t = 0; t < NV; t++) begin
      int ev, ra, sa;
      @(negedge clk);
      gen_vector(t % NUM_MODES, int'(N), int'(EW), int'(MW), G, v);
      for (int i = 0; i < int'(N); i++) terms[i] = (EW+MW+1)'(v[i]);
      valid_i = 1;
      exp_word.push_back(ref_adder(v, int'(EW), int'(MW), G, rad, ev, ra, sa));
      exp_cycle.push_back(cycle);
    end
    @(negedge clk);
    valid_i = 0;
    repeat (LAT + 2) @(posedge clk);
    #2;
    if (exp_word.size() != 0) failures++;
    $display("%-24s checks=%0d failures=%0d", NAME, checks, failures);
    done = 1;
  end
endmodule

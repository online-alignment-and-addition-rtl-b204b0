// tb_online_fp_adder: end-to-end test of the adder at its default size
// (32 BFloat16 terms, 8-2-2 tree, 4-cycle latency).
//
// Random term sets of eight stimulus classes stream in, one per cycle with
// occasional idle cycles. Each result is compared bit for bit with
// fp_ref_pkg::ref_adder (the same tree evaluated in integer arithmetic,
// then rounded to nearest even); for sets whose exponents lie within the
// guard-bit range no bit is lost in alignment, and the result is also
// compared with the exactly rounded sum. valid_o must follow valid_i after
// exactly 4 cycles. The test counts how often each mechanism occurred
// (partial-sum realignment inside the tree, shift saturation, cancellation,
// carry-out renormalisation, rounding up, subnormal result, overflow to
// infinity, NaN/infinity inputs, zero and negative sums, pipeline bubbles)
// and fails if any never did.
module tb_online_fp_adder;
  import fp_ref_pkg::*;

  localparam int N = 32, EW = 8, MW = 7, G = 3, LAT = 4;
  localparam int NV = 4000;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                  rst_n;
  logic                  valid_i, valid_o;
  logic [N-1:0][EW+MW:0] terms;
  logic [EW+MW:0]        sum;

  online_fp_adder dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid_i), .terms_i(terms),
                       .valid_o(valid_o), .sum_o(sum));

  int checks = 0, failures = 0, cycle = 0;
  int evcount [NUM_EV];
  int n_realign = 0, n_sat = 0, n_exact = 0, n_bubble = 0;
  word_t exp_word[$];
  int    exp_cycle[$];
  int    radix[] = '{8, 2, 2};

  always @(posedge clk) cycle <= cycle + 1;

  // output monitor
  always @(posedge clk) begin
    #1;
    if (rst_n && valid_o) begin
      checks += 2;
      if (exp_word.size() == 0) begin
        failures += 2;
        $display("FAIL: unexpected valid_o at cycle %0d", cycle);
      end else begin
        word_t e; int c;
        e = exp_word.pop_front();
        c = exp_cycle.pop_front();
        if (word_t'(sum) != e) begin
          failures++;
          if (failures < 10) $display("FAIL sum got %h exp %h", sum, e);
        end
        if (cycle - c != LAT) begin
          failures++;
          if (failures < 10) $display("FAIL latency %0d, expected %0d", cycle - c, LAT);
        end
      end
    end
  end

  initial begin
    word_t v[];
    foreach (evcount[b]) evcount[b] = 0;
    rst_n = 0; valid_i = 0; terms = '0;
    repeat (3) @(posedge clk);
    #2 rst_n = 1;
    for (int t = 0; t < NV; t++) begin
      int mode, ev, ra, sa; word_t e;
      @(negedge clk);
      if ($urandom % 10 == 0) begin
        valid_i = 0;
        n_bubble++;
        continue;
      end
      mode = t % NUM_MODES;
      gen_vector(mode, N, EW, MW, G, v);
      for (int i = 0; i < N; i++) terms[i] = (EW+MW+1)'(v[i]);
      valid_i = 1;
      e = ref_adder(v, EW, MW, G, radix, ev, ra, sa);
      for (int b = 0; b < NUM_EV; b++) if (ev[b]) evcount[b]++;
      if (ra > 0) n_realign++;
      if (sa > 0) n_sat++;
      if (mode == 1) begin
        n_exact++;
        checks++;
        if (ref_exact(v, EW, MW, G) != e) begin
          failures++;
          $display("FAIL: exact sum differs from tree reference");
        end
      end
      exp_word.push_back(e);
      exp_cycle.push_back(cycle);
    end
    @(negedge clk);
    valid_i = 0;
    repeat (LAT + 3) @(posedge clk);
    #2;
    if (exp_word.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", exp_word.size());
    end
    $display("realigned=%0d saturated=%0d exact=%0d bubbles=%0d", n_realign, n_sat, n_exact, n_bubble);
    for (int b = 0; b < NUM_EV; b++) $display("event %0d seen %0d times", b, evcount[b]);
    for (int b = 0; b < NUM_EV; b++) if (evcount[b] == 0) begin
      failures++;
      $display("FAIL: event %0d never happened", b);
    end
    if (n_realign == 0 || n_sat == 0 || n_exact == 0 || n_bubble == 0) begin
      failures++;
      $display("FAIL: a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NV + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

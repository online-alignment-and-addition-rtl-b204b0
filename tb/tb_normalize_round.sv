// tb_normalize_round: drives the normaliser of the default BFloat16 adder
// (32 terms, 3 guard bits) with random and directed (exponent, sum) pairs
// and special-value flags, and compares the word with
// fp_ref_pkg::ref_round. Counts every case the reference reports
// (subnormal, overflow, rounding up, carry-out renormalisation, zero,
// special, negative) and fails if one never occurred.
module tb_normalize_round;
  import fp_ref_pkg::*;

  localparam int EW = 8, MW = 7, G = 3, LOGN = 5;
  localparam int W = 2 + LOGN + MW + G;

  logic [EW-1:0]    lam;
  logic [W-1:0]     o;
  logic             nan, pinf, ninf;
  logic [EW+MW:0]   word;

  normalize_round dut (.lam_i(lam), .o_i(o), .any_nan_i(nan), .pos_inf_i(pinf),
                       .neg_inf_i(ninf), .word_o(word));

  int checks = 0, failures = 0;
  int evcount [NUM_EV];

  task automatic apply(int l, longint v, bit fn, bit fp, bit fm);
    int ev; word_t e;
    lam = EW'(l); o = W'(v); nan = fn; pinf = fp; ninf = fm;
    #1;
    e = ref_round(l, v, EW, MW, G, fn, fp, fm, ev);
    for (int b = 0; b < NUM_EV; b++) if (ev[b]) evcount[b]++;
    checks++;
    if (word_t'(word) != e) begin
      failures++;
      if (failures < 10) $display("FAIL lam=%0d o=%0d flags=%b%b%b got %h exp %h",
                                  l, v, fn, fp, fm, word, e);
    end
  endtask

  initial begin
    longint lim;
    lim = longint'(1) <<< (W - 1);
    foreach (evcount[b]) evcount[b] = 0;
    // directed: ties to even, carry-out, overflow, subnormal, zero, specials
    apply(127, longint'(9'h100) <<< G, 0, 0, 0);             // exactly 1.0
    apply(127, (longint'(9'h1ff) <<< G) + 4, 0, 0, 0);        // tie, round up, carry
    apply(127, (longint'(9'h100) <<< G) + 4, 0, 0, 0);        // tie, stays even
    apply(127, (longint'(9'h101) <<< G) + 4, 0, 0, 0);        // tie, odd -> up
    apply(254, (longint'(1) <<< (MW + G + 5)) - 1, 0, 0, 0);  // overflow
    apply(1, 3, 0, 0, 0);                                     // subnormal
    apply(1, -((longint'(1) <<< (MW + G)) - 1), 0, 0, 0);     // rounds to min normal
    apply(100, 0, 0, 0, 0);
    apply(100, 5, 1, 0, 0);
    apply(100, 5, 0, 1, 0);
    apply(100, 5, 0, 0, 1);
    apply(100, 5, 0, 1, 1);
    for (int t = 0; t < 200000; t++) begin
      int l; longint v; int sh;
      l  = (t % 5 == 0) ? 1 + int'($urandom % 8) : 1 + int'($urandom % 254);
      sh = int'($urandom % (W - 1));
      v  = longint'($urandom) & ((longint'(1) <<< sh) - 1);
      if ($urandom % 2) v = -v;
      if (v <= -lim || v >= lim) v = 0;
      apply(l, v, ($urandom % 64) == 0, ($urandom % 64) == 0, ($urandom % 64) == 0);
    end
    for (int b = 0; b < NUM_EV; b++) begin
      $display("event %0d seen %0d times", b, evcount[b]);
      if (evcount[b] == 0) begin
        failures++;
        $display("FAIL: event %0d never happened", b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

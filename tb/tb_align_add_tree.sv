// tb_align_add_tree: streams random term sets through two trees, the
// default registered 8-2-2 tree for 32 terms (latency 3 cycles) and a
// combinational 2-2-2 tree for 8 terms, and compares the root with
// fp_ref_pkg::ref_tree. A new set enters every cycle, so the check also
// proves the latency and the one-set-per-cycle rate.
module tb_align_add_tree;
  import fp_ref_pkg::*;

  localparam int EW = 8;
  localparam int W  = fp_pkg::sum_width(32, 7, 3);
  localparam int NV = 3000;
  localparam int LAT = 3;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [31:0][EW-1:0] lam_a;  logic [31:0][W-1:0] o_a;  logic [EW-1:0] rl_a; logic [W-1:0] ro_a;
  logic [7:0][EW-1:0]  lam_b;  logic [7:0][W-1:0]  o_b;  logic [EW-1:0] rl_b; logic [W-1:0] ro_b;

  align_add_tree dut_a (.clk_i(clk), .lam_i(lam_a), .o_i(o_a), .lam_o(rl_a), .o_o(ro_a));
  align_add_tree #(.N(8), .EW(EW), .W(W), .RADIX('{0: 2, 1: 2, 2: 2, default: 1}), .LEVEL_REG('0))
    dut_b (.clk_i(clk), .lam_i(lam_b), .o_i(o_b), .lam_o(rl_b), .o_o(ro_b));

  int checks = 0, failures = 0, cycles = 0;
  int realign_total = 0, sat_total = 0;
  int     exp_l[$];
  longint exp_o[$];

  task automatic compare(string what, int gl, longint go, int el, longint eo);
    checks++;
    if (gl != el || go != eo) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got (%0d,%0d) exp (%0d,%0d)", what, gl, go, el, eo);
    end
  endtask

  function automatic void make_terms(int n, int t, output int e[], output longint m[]);
    int base, spread;
    e = new[n]; m = new[n];
    base = int'($urandom % 255) + 1;
    spread = (t % 4 == 0) ? 254 : ((t % 4 == 1) ? 3 : 12);
    foreach (e[k]) begin
      e[k] = base - int'($urandom % (spread + 1));
      if (e[k] < 1) e[k] = 1;
      m[k] = longint'($urandom % 256) <<< 3;
      if ($urandom % 2) m[k] = -m[k];
      if ($urandom % 16 == 0) m[k] = 0;
    end
  endfunction

  initial begin
    int ea[], eb[]; longint ma[], mb[];
    int l, ra, sa; longint o;
    int rad_a[] = '{8, 2, 2};
    int rad_b[] = '{2, 2, 2};
    for (int t = 0; t < NV + LAT; t++) begin
      if (t < NV) begin
        make_terms(32, t, ea, ma);
        for (int k = 0; k < 32; k++) begin lam_a[k] = EW'(ea[k]); o_a[k] = W'(ma[k]); end
        ref_tree(ea, ma, rad_a, l, o, ra, sa, W);
        realign_total += ra; sat_total += sa;
        exp_l.push_back(l); exp_o.push_back(o);
        make_terms(8, t + 1, eb, mb);
        for (int k = 0; k < 8; k++) begin lam_b[k] = EW'(eb[k]); o_b[k] = W'(mb[k]); end
      end
      #1;
      if (t < NV) begin
        ref_tree(eb, mb, rad_b, l, o, ra, sa, W);
        realign_total += ra;
        compare("2-2-2 combinational", int'(rl_b), longint'($signed(ro_b)), l, o);
      end
      @(posedge clk); cycles++;
      #1;
      if (t >= LAT - 1 && exp_l.size() > 0 && t - (LAT - 1) < NV) begin
        compare("8-2-2 registered", int'(rl_a), longint'($signed(ro_a)),
                exp_l.pop_front(), exp_o.pop_front());
      end
    end
    if (exp_l.size() != 0) begin
      failures++;
      $display("FAIL: %0d results never compared", exp_l.size());
    end
    if (realign_total == 0 || sat_total == 0) begin
      failures++;
      $display("FAIL: partial-sum realignment or shift saturation never happened");
    end
    $display("partial sums realigned=%0d saturated shifts=%0d", realign_total, sat_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NV * 2 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

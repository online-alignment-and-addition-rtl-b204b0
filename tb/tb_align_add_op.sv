// tb_align_add_op: random and directed checks of the align-and-add
// operator for radix 2, 4 and 8. The expected pair is the maximum exponent
// and the sum of floor(o_k / 2^(max - lambda_k)), computed with division.
module tb_align_add_op;
  import fp_ref_pkg::*;

  localparam int EW = 8;
  localparam int W  = 17;

  logic [1:0][EW-1:0] l2;  logic [1:0][W-1:0] o2;  logic [EW-1:0] lo2; logic [W-1:0] oo2;
  logic [3:0][EW-1:0] l4;  logic [3:0][W-1:0] o4;  logic [EW-1:0] lo4; logic [W-1:0] oo4;
  logic [7:0][EW-1:0] l8;  logic [7:0][W-1:0] o8;  logic [EW-1:0] lo8; logic [W-1:0] oo8;

  int checks = 0, failures = 0;
  int realigned = 0, saturated = 0;

  align_add_op #(.R(2), .EW(EW), .W(W)) dut2 (.lam_i(l2), .o_i(o2), .lam_o(lo2), .o_o(oo2));
  align_add_op #(.R(4), .EW(EW), .W(W)) dut4 (.lam_i(l4), .o_i(o4), .lam_o(lo4), .o_o(oo4));
  align_add_op #(.R(8), .EW(EW), .W(W)) dut8 (.lam_i(l8), .o_i(o8), .lam_o(lo8), .o_o(oo8));

  // operand values stay within +/- 2^(W-4) so that eight of them cannot overflow
  function automatic longint rnd_o();
    longint v;
    v = longint'($urandom % (1 << (W - 4)));
    return ($urandom % 2) ? -v : v;
  endfunction

  function automatic int rnd_l(int spread, int base);
    int v;
    v = base - int'($urandom % (spread + 1));
    return (v < 0) ? 0 : v;
  endfunction

  task automatic expect_pair(int r, int lam[], longint o[], logic [EW-1:0] gl, logic [W-1:0] go);
    int mx; longint s;
    mx = lam[0];
    for (int k = 1; k < r; k++) if (lam[k] > mx) mx = lam[k];
    s = 0;
    for (int k = 0; k < r; k++) begin
      s += floor_shift(o[k], mx - lam[k]);
      if (mx - lam[k] > 0) realigned++;
      if (mx - lam[k] >= W) saturated++;
    end
    checks += 2;
    if (int'(gl) != mx) begin
      failures++;
      $display("FAIL radix-%0d lambda got %0d exp %0d", r, gl, mx);
    end
    if (longint'($signed(go)) != s) begin
      failures++;
      if (failures < 10) $display("FAIL radix-%0d sum got %0d exp %0d", r, $signed(go), s);
    end
  endtask

  initial begin
    int lam[]; longint o[];
    for (int t = 0; t < 20000; t++) begin
      int spread, base;
      spread = (t % 3 == 0) ? 255 : ((t % 3 == 1) ? 24 : 4);
      base = int'($urandom % 256);
      lam = new[8]; o = new[8];
      foreach (lam[k]) begin lam[k] = rnd_l(spread, base); o[k] = rnd_o(); end
      if (t == 0) begin  // directed: one huge difference, negative operand
        lam = '{200, 10, 0, 0, 0, 0, 0, 0};
        o   = '{5, -7, -1, 1, 0, 3, -3, 100};
      end
      for (int k = 0; k < 2; k++) begin l2[k] = EW'(lam[k]); o2[k] = W'(o[k]); end
      for (int k = 0; k < 4; k++) begin l4[k] = EW'(lam[k]); o4[k] = W'(o[k]); end
      for (int k = 0; k < 8; k++) begin l8[k] = EW'(lam[k]); o8[k] = W'(o[k]); end
      #1;
      expect_pair(2, lam, o, lo2, oo2);
      expect_pair(4, lam, o, lo4, oo4);
      expect_pair(8, lam, o, lo8, oo8);
    end
    if (realigned == 0 || saturated == 0) begin
      failures++;
      $display("FAIL: alignment shift or shift saturation never exercised");
    end
    $display("realigned operands=%0d saturated shifts=%0d", realigned, saturated);
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

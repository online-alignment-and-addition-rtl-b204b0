// tb_fp_unpack: exhaustive check of fp_unpack for BFloat16 (all 65536
// encodings) and FP8_e4m3 (all 256 encodings). The expected exponent,
// signed fraction and special flags come from fp_ref_pkg::ref_decode.
module tb_fp_unpack;
  import fp_ref_pkg::*;

  localparam int G = 3;
  localparam int W_BF = fp_pkg::sum_width(32, 7, G);
  localparam int W_E4 = fp_pkg::sum_width(16, 3, G);

  logic [15:0]            w_bf;
  logic [7:0]             e_bf;
  logic signed [W_BF-1:0] f_bf;
  logic                   s_bf, i_bf, n_bf;
  logic [7:0]             w_e4;
  logic [3:0]             e_e4;
  logic signed [W_E4-1:0] f_e4;
  logic                   s_e4, i_e4, n_e4;

  int checks = 0, failures = 0;

  fp_unpack #(.EW(8), .MW(7), .G(G), .W(W_BF)) dut_bf (
    .word_i(w_bf), .exp_o(e_bf), .frac_o(f_bf), .sign_o(s_bf), .is_inf_o(i_bf), .is_nan_o(n_bf));
  fp_unpack #(.EW(4), .MW(3), .G(G), .W(W_E4)) dut_e4 (
    .word_i(w_e4), .exp_o(e_e4), .frac_o(f_e4), .sign_o(s_e4), .is_inf_o(i_e4), .is_nan_o(n_e4));

  task automatic check(string what, longint got, longint exp, word_t w);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s word=%h got=%0d exp=%0d", what, w, got, exp);
    end
  endtask

  initial begin
    int e; longint m; bit s, inf, nan;
    for (int v = 0; v < 65536; v++) begin
      w_bf = 16'(v);
      #1;
      ref_decode(word_t'(v), 8, 7, G, e, m, s, inf, nan);
      check("bf16 exp", longint'(e_bf), longint'(e), word_t'(v));
      check("bf16 frac", longint'(f_bf), m, word_t'(v));
      check("bf16 flags", {s_bf, i_bf, n_bf}, {s, inf, nan}, word_t'(v));
    end
    for (int v = 0; v < 256; v++) begin
      w_e4 = 8'(v);
      #1;
      ref_decode(word_t'(v), 4, 3, G, e, m, s, inf, nan);
      check("e4m3 exp", longint'(e_e4), longint'(e), word_t'(v));
      check("e4m3 frac", longint'(f_e4), m, word_t'(v));
      check("e4m3 flags", {s_e4, i_e4, n_e4}, {s, inf, nan}, word_t'(v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

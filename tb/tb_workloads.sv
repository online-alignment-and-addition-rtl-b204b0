// tb_workloads: runs every adder configuration that appears in the
// evaluation: the best configuration per format for 16, 32 and 64 terms
// (FP32, BFloat16, FP8_e4m3, FP8_e5m2, FP8_e6m1), all fifteen mixed-radix
// 32-term BFloat16 configurations plus the single radix-32 operator, and
// three single-cycle variants (no register inside the tree). Each instance of
// adder_check streams random term sets and checks results and latency.
module tb_workloads;
  localparam int NC = 33;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [NC-1:0] done;
  int chk [NC];
  int fail [NC];

  adder_check #(.NAME("fp32_16_8-2"), .N(16), .EW(8), .MW(23), .RADIX('{0: 8, 1: 2, default: 1}))
    u0 (.clk(clk), .done(done[0]), .checks(chk[0]), .failures(fail[0]));
  adder_check #(.NAME("bf16_16_8-2"), .N(16), .EW(8), .MW(7), .RADIX('{0: 8, 1: 2, default: 1}))
    u1 (.clk(clk), .done(done[1]), .checks(chk[1]), .failures(fail[1]));
  adder_check #(.NAME("e4m3_16_8-2"), .N(16), .EW(4), .MW(3), .RADIX('{0: 8, 1: 2, default: 1}))
    u2 (.clk(clk), .done(done[2]), .checks(chk[2]), .failures(fail[2]));
  adder_check #(.NAME("e5m2_16_2-4-2"), .N(16), .EW(5), .MW(2), .RADIX('{0: 2, 1: 4, 2: 2, default: 1}))
    u3 (.clk(clk), .done(done[3]), .checks(chk[3]), .failures(fail[3]));
  adder_check #(.NAME("e6m1_16_4-2-2"), .N(16), .EW(6), .MW(1), .RADIX('{0: 4, 1: 2, 2: 2, default: 1}))
    u4 (.clk(clk), .done(done[4]), .checks(chk[4]), .failures(fail[4]));
  adder_check #(.NAME("fp32_32_2-2-2-2-2"), .N(32), .EW(8), .MW(23), .RADIX('{0: 2, 1: 2, 2: 2, 3: 2, 4: 2, default: 1}))
    u5 (.clk(clk), .done(done[5]), .checks(chk[5]), .failures(fail[5]));
  adder_check #(.NAME("bf16_32_8-2-2"), .N(32), .EW(8), .MW(7), .RADIX('{0: 8, 1: 2, 2: 2, default: 1}))
    u6 (.clk(clk), .done(done[6]), .checks(chk[6]), .failures(fail[6]));
  adder_check #(.NAME("e4m3_32_8-2-2"), .N(32), .EW(4), .MW(3), .RADIX('{0: 8, 1: 2, 2: 2, default: 1}))
    u7 (.clk(clk), .done(done[7]), .checks(chk[7]), .failures(fail[7]));
  adder_check #(.NAME("e5m2_32_8-2-2"), .N(32), .EW(5), .MW(2), .RADIX('{0: 8, 1: 2, 2: 2, default: 1}))
    u8 (.clk(clk), .done(done[8]), .checks(chk[8]), .failures(fail[8]));
  adder_check #(.NAME("e6m1_32_8-2-2"), .N(32), .EW(6), .MW(1), .RADIX('{0: 8, 1: 2, 2: 2, default: 1}))
    u9 (.clk(clk), .done(done[9]), .checks(chk[9]), .failures(fail[9]));
  adder_check #(.NAME("fp32_64_2-2-2-2-4"), .N(64), .EW(8), .MW(23), .RADIX('{0: 2, 1: 2, 2: 2, 3: 2, 4: 4, default: 1}))
    u10 (.clk(clk), .done(done[10]), .checks(chk[10]), .failures(fail[10]));
  adder_check #(.NAME("bf16_64_2-4-2-2-2"), .N(64), .EW(8), .MW(7), .RADIX('{0: 2, 1: 4, 2: 2, 3: 2, 4: 2, default: 1}))
    u11 (.clk(clk), .done(done[11]), .checks(chk[11]), .failures(fail[11]));
  adder_check #(.NAME("e4m3_64_8-4-2"), .N(64), .EW(4), .MW(3), .RADIX('{0: 8, 1: 4, 2: 2, default: 1}))
    u12 (.clk(clk), .done(done[12]), .checks(chk[12]), .failures(fail[12]));
  adder_check #(.NAME("e5m2_64_8-8"), .N(64), .EW(5), .MW(2), .RADIX('{0: 8, 1: 8, default: 1}))
    u13 (.clk(clk), .done(done[13]), .checks(chk[13]), .failures(fail[13]));
  adder_check #(.NAME("e6m1_64_2-8-4"), .N(64), .EW(6), .MW(1), .RADIX('{0: 2, 1: 8, 2: 4, default: 1}))
    u14 (.clk(clk), .done(done[14]), .checks(chk[14]), .failures(fail[14]));
  adder_check #(.NAME("bf16_32_4-8"), .N(32), .EW(8), .MW(7), .RADIX('{0: 4, 1: 8, default: 1}))
    u15 (.clk(clk), .done(done[15]), .checks(chk[15]), .failures(fail[15]));
  adder_check #(.NAME("bf16_32_8-4"), .N(32), .EW(8), .MW(7), .RADIX('{0: 8, 1: 4, default: 1}))
    u16 (.clk(clk), .done(done[16]), .checks(chk[16]), .failures(fail[16]));
  adder_check #(.NAME("bf16_32_2-2-8"), .N(32), .EW(8), .MW(7), .RADIX('{0: 2, 1: 2, 2: 8, default: 1}))
    u17 (.clk(clk), .done(done[17]), .checks(chk[17]), .failures(fail[17]));
  adder_check #(.NAME("bf16_32_2-4-4"), .N(32), .EW(8), .MW(7), .RADIX('{0: 2, 1: 4, 2: 4, default: 1}))
    u18 (.clk(clk), .done(done[18]), .checks(chk[18]), .failures(fail[18]));
  adder_check #(.NAME("bf16_32_2-8-2"), .N(32), .EW(8), .MW(7), .RADIX('{0: 2, 1: 8, 2: 2, default: 1}))
    u19 (.clk(clk), .done(done[19]), .checks(chk[19]), .failures(fail[19]));
  adder_check #(.NAME("bf16_32_4-2-4"), .N(32), .EW(8), .MW(7), .RADIX('{0: 4, 1: 2, 2: 4, default: 1}))
    u20 (.clk(clk), .done(done[20]), .checks(chk[20]), .failures(fail[20]));
  adder_check #(.NAME("bf16_32_4-4-2"), .N(32), .EW(8), .MW(7), .RADIX('{0: 4, 1: 4, 2: 2, default: 1}))
    u21 (.clk(clk), .done(done[21]), .checks(chk[21]), .failures(fail[21]));
  adder_check #(.NAME("bf16_32_2-2-2-4"), .N(32), .EW(8), .MW(7), .RADIX('{0: 2, 1: 2, 2: 2, 3: 4, default: 1}))
    u22 (.clk(clk), .done(done[22]), .checks(chk[22]), .failures(fail[22]));
  adder_check #(.NAME("bf16_32_2-2-4-2"), .N(32), .EW(8), .MW(7), .RADIX('{0: 2, 1: 2, 2: 4, 3: 2, default: 1}))
    u23 (.clk(clk), .done(done[23]), .checks(chk[23]), .failures(fail[23]));
  adder_check #(.NAME("bf16_32_2-4-2-2"), .N(32), .EW(8), .MW(7), .RADIX('{0: 2, 1: 4, 2: 2, 3: 2, default: 1}))
    u24 (.clk(clk), .done(done[24]), .checks(chk[24]), .failures(fail[24]));
  adder_check #(.NAME("bf16_32_4-2-2-2"), .N(32), .EW(8), .MW(7), .RADIX('{0: 4, 1: 2, 2: 2, 3: 2, default: 1}))
    u25 (.clk(clk), .done(done[25]), .checks(chk[25]), .failures(fail[25]));
  adder_check #(.NAME("bf16_32_2-2-2-2-2"), .N(32), .EW(8), .MW(7), .RADIX('{0: 2, 1: 2, 2: 2, 3: 2, 4: 2, default: 1}))
    u26 (.clk(clk), .done(done[26]), .checks(chk[26]), .failures(fail[26]));
  adder_check #(.NAME("bf16_32_16-2"), .N(32), .EW(8), .MW(7), .RADIX('{0: 16, 1: 2, default: 1}))
    u27 (.clk(clk), .done(done[27]), .checks(chk[27]), .failures(fail[27]));
  adder_check #(.NAME("bf16_32_2-16"), .N(32), .EW(8), .MW(7), .RADIX('{0: 2, 1: 16, default: 1}))
    u28 (.clk(clk), .done(done[28]), .checks(chk[28]), .failures(fail[28]));
  adder_check #(.NAME("bf16_32_32"), .N(32), .EW(8), .MW(7), .RADIX('{0: 32, default: 1}))
    u29 (.clk(clk), .done(done[29]), .checks(chk[29]), .failures(fail[29]));
  adder_check #(.NAME("bf16_32_2-2-8_1stage"), .N(32), .EW(8), .MW(7), .RADIX('{0: 2, 1: 2, 2: 8, default: 1}), .LEVEL_REG('0))
    u30 (.clk(clk), .done(done[30]), .checks(chk[30]), .failures(fail[30]));
  adder_check #(.NAME("bf16_32_4-4-2_1stage"), .N(32), .EW(8), .MW(7), .RADIX('{0: 4, 1: 4, 2: 2, default: 1}), .LEVEL_REG('0))
    u31 (.clk(clk), .done(done[31]), .checks(chk[31]), .failures(fail[31]));
  adder_check #(.NAME("bf16_32_32_1stage"), .N(32), .EW(8), .MW(7), .RADIX('{0: 32, default: 1}), .LEVEL_REG('0))
    u32 (.clk(clk), .done(done[32]), .checks(chk[32]), .failures(fail[32]));

  initial begin
    int checks, failures;
    wait (&done);
    checks = 0; failures = 0;
    for (int i = 0; i < NC; i++) begin
      checks += chk[i];
      failures += fail[i];
    end
    $display("configurations=%0d", NC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule

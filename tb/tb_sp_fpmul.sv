// tb_sp_fpmul: self-checking testbench for the 32-bit floating point multiplier.
//
// Every result and flag bundle is compared with tb_fp_ref_pkg::ref_mul, a
// reference written independently of the RTL. For binary32 it also checks, with real arithmetic, that the result lies within half an ulp of the exact product.
// Operands come from hand-written cases with known products, random
// normal numbers, numbers with any exponent (overflow and underflow),
// sparse fractions (exact and tie-rounded products) and special values.
// The testbench counts how often rounding up, a rounding tie, overflow,
// underflow and invalid occurred and fails if any never did. One pair
// per clock; a watchdog ends a run that does not finish in time.
module tb_sp_fpmul;
  import civp_pkg::*;
  import tb_fp_ref_pkg::*;

  localparam int EW = 8;
  localparam int FW = 23;
  localparam int W  = 32;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [W-1:0] a, b, result;
  fp_flags_t    flags;
  int checks = 0, failures = 0;
  int n_round_up = 0, n_tie = 0, n_ovf = 0, n_unf = 0, n_inv = 0;

  sp_fpmul dut (.a(a), .b(b), .result(result), .flags(flags));

  task automatic check(input logic [W-1:0] ta, input logic [W-1:0] tbv);
    logic [127:0] exp_r;
    logic [2:0]   exp_f;
    a = ta; b = tbv;
    @(posedge clk);
    exp_r = ref_mul(128'(ta), 128'(tbv), EW, FW, exp_f);
    checks++;
    if (result !== W'(exp_r) || flags !== fp_flags_t'(exp_f)) begin
      failures++;
      if (failures < 10)
        $display("FAIL a=%h b=%h result=%h flags=%b expected=%h flags=%b",
                 ta, tbv, result, flags, W'(exp_r), exp_f);
    end
    if (flags.overflow)  n_ovf++;
    if (flags.underflow) n_unf++;
    if (flags.invalid)   n_inv++;
    // Rounding statistics, observed on the significand product inside.
    if (dut.u_round.round_up && ta[W-2 -: EW] != 0 && tbv[W-2 -: EW] != 0) n_round_up++;
    if (dut.u_round.guard && !dut.u_round.sticky && ta[W-2 -: EW] != 0 && tbv[W-2 -: EW] != 0) n_tie++;
    // Independent property: the result is within half an ulp of the exact
    // product, both computed as binary64 reals (exact for binary32 inputs).
    if (ta[30:23] > 8'd60 && ta[30:23] < 8'd190 && tbv[30:23] > 8'd60 && tbv[30:23] < 8'd190
        && flags == '0 && result[30:23] != 0) begin
      real ra, rb, rr, ulp;
      ra  = $bitstoreal({ta[31], 11'(ta[30:23]) + 11'd896, ta[22:0], 29'd0});
      rb  = $bitstoreal({tbv[31], 11'(tbv[30:23]) + 11'd896, tbv[22:0], 29'd0});
      rr  = $bitstoreal({result[31], 11'(result[30:23]) + 11'd896, result[22:0], 29'd0});
      ulp = $bitstoreal({1'b0, 11'(result[30:23]) + 11'd896 - 11'd23, 52'd0});
      checks++;
      if ((rr - ra * rb) > ulp / 2 || (ra * rb - rr) > ulp / 2) begin
        failures++;
        $display("FAIL sp not within half an ulp a=%h b=%h result=%h", ta, tbv, result);
      end
    end
  endtask

  task automatic known(input logic [W-1:0] ta, input logic [W-1:0] tbv, input logic [W-1:0] want);
    check(ta, tbv);
    checks++;
    if (result !== want) begin
      failures++;
      $display("FAIL known a=%h b=%h result=%h want=%h", ta, tbv, result, want);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    known(32'h3fc00000, 32'h3fc00000, 32'h40100000);  // 1.5 * 1.5 = 2.25
    known(32'h40000000, 32'h40400000, 32'h40c00000);  // 2 * 3 = 6
    known(32'hbf800000, 32'h3f800000, 32'hbf800000);  // -1 * 1 = -1
    known(32'h3f800001, 32'h3fc00000, 32'h3fc00002);  // (1+2^-23)*1.5: tie, odd, rounds up
    known(32'h7f000000, 32'h40000000, 32'h7f800000);  // 2^127 * 2 overflows to +inf
    known(32'h00800000, 32'h3f000000, 32'h00000000);  // 2^-126 * 0.5 underflows to +0
    known(32'h7f800000, 32'h00000000, 32'h7fc00000);  // inf * 0 = NaN
    for (int i = 0; i < 20000; i++) check(W'(rand_operand(EW, FW, 0)), W'(rand_operand(EW, FW, 0)));
    for (int i = 0; i < 20000; i++) check(W'(rand_operand(EW, FW, 1)), W'(rand_operand(EW, FW, 1)));
    for (int i = 0; i < 20000; i++) check(W'(rand_operand(EW, FW, 2)), W'(rand_operand(EW, FW, 0)));
    for (int i = 0; i < 20000 / 4; i++) check(W'(rand_operand(EW, FW, 3)), W'(rand_operand(EW, FW, $urandom_range(0, 3))));
    $display("round-ups %0d, ties %0d, overflows %0d, underflows %0d, invalid %0d",
             n_round_up, n_tie, n_ovf, n_unf, n_inv);
    checks++;
    if (n_round_up == 0 || n_tie == 0 || n_ovf == 0 || n_unf == 0 || n_inv == 0) begin
      failures++;
      $display("FAIL a rounding or exception case never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dp_fpmul: self-checking testbench for the 64-bit floating point multiplier.
//
// Every result and flag bundle is compared with tb_fp_ref_pkg::ref_mul, a
// reference written independently of the RTL. For normal binary64 results it also compares with the simulator's own real multiplication.
// Operands come from hand-written cases with known products, random
// normal numbers, numbers with any exponent (overflow and underflow),
// sparse fractions (exact and tie-rounded products) and special values.
// The testbench counts how often rounding up, a rounding tie, overflow,
// underflow and invalid occurred and fails if any never did. One pair
// per clock; a watchdog ends a run that does not finish in time.
module tb_dp_fpmul;
  import civp_pkg::*;
  import tb_fp_ref_pkg::*;

  localparam int EW = 11;
  localparam int FW = 52;
  localparam int W  = 64;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [W-1:0] a, b, result;
  fp_flags_t    flags;
  int checks = 0, failures = 0;
  int n_round_up = 0, n_tie = 0, n_ovf = 0, n_unf = 0, n_inv = 0;

  dp_fpmul dut (.a(a), .b(b), .result(result), .flags(flags));

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
    // Independent cross-check against the simulator's own binary64
    // multiplication (round to nearest even) for normal results.
    if (flags == '0 && result[62:52] != 0 && result[62:52] != 11'h7ff) begin
      checks++;
      if ($realtobits($bitstoreal(ta) * $bitstoreal(tbv)) !== result) begin
        failures++;
        $display("FAIL dp vs real a=%h b=%h result=%h", ta, tbv, result);
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
    known(64'h3ff8000000000000, 64'h3ff8000000000000, 64'h4002000000000000);  // 1.5 * 1.5
    known(64'h4000000000000000, 64'h4008000000000000, 64'h4018000000000000);  // 2 * 3
    known(64'h3ff0000000000001, 64'h3ff8000000000000, 64'h3ff8000000000002);  // tie, odd, up
    known(64'h7fe0000000000000, 64'h4000000000000000, 64'h7ff0000000000000);  // overflow
    known(64'h0010000000000000, 64'h3fe0000000000000, 64'h0000000000000000);  // underflow
    known(64'hfff0000000000000, 64'h8000000000000000, 64'h7ff8000000000000);  // -inf * -0 = NaN
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

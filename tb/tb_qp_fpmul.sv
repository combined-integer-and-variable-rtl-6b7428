// tb_qp_fpmul: self-checking testbench for the 128-bit floating point multiplier.
//
// Every result and flag bundle is compared with tb_fp_ref_pkg::ref_mul, a
// reference written independently of the RTL. For binary128 it also checks exact products of binary64-sized significands bit for bit.
// Operands come from hand-written cases with known products, random
// normal numbers, numbers with any exponent (overflow and underflow),
// sparse fractions (exact and tie-rounded products) and special values.
// The testbench counts how often rounding up, a rounding tie, overflow,
// underflow and invalid occurred and fails if any never did. One pair
// per clock; a watchdog ends a run that does not finish in time.
module tb_qp_fpmul;
  import civp_pkg::*;
  import tb_fp_ref_pkg::*;

  localparam int EW = 15;
  localparam int FW = 112;
  localparam int W  = 128;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [W-1:0] a, b, result;
  fp_flags_t    flags;
  int checks = 0, failures = 0;
  int n_round_up = 0, n_tie = 0, n_ovf = 0, n_unf = 0, n_inv = 0;

  qp_fpmul dut (.a(a), .b(b), .result(result), .flags(flags));

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
    known({16'h3fff, 112'h8000_0000_0000_0000_0000_0000_0000}, {16'h3fff, 112'h8000_0000_0000_0000_0000_0000_0000},
          {16'h4000, 112'h2000_0000_0000_0000_0000_0000_0000});  // 1.5 * 1.5 = 2.25
    known({16'h4000, 112'h0}, {16'h4000, 112'h8000_0000_0000_0000_0000_0000_0000},
          {16'h4001, 112'h8000_0000_0000_0000_0000_0000_0000});  // 2 * 3 = 6
    known({16'h3fff, 112'h1}, {16'h3fff, 112'h8000_0000_0000_0000_0000_0000_0000},
          {16'h3fff, 112'h8000_0000_0000_0000_0000_0000_0002});  // tie, odd, up
    known({16'hbfff, 112'h0}, {16'h3fff, 112'h0}, {16'hbfff, 112'h0});  // -1 * 1
    known({16'h7ffe, 112'h0}, {16'h4000, 112'h0}, {16'h7fff, 112'h0});  // overflow
    known({16'h0001, 112'h0}, {16'h3ffe, 112'h0}, {16'h0000, 112'h0});  // underflow
    known({16'h7fff, 112'h0}, {16'h0000, 112'h0}, {16'h7fff, 112'h8000_0000_0000_0000_0000_0000_0000});  // inf*0
    // Quadruple products of binary64 values are exact (106 <= 113 bits):
    // compare them with the binary64 value scaled up, bit for bit.
    for (int i = 0; i < 200; i++) begin
      logic [63:0] da, db;
      logic [105:0] ps;
      da = {2'b00, 10'($urandom_range(500, 523)), 52'(rand128())};
      db = {2'b00, 10'($urandom_range(500, 523)), 52'(rand128())};
      check({1'b0, 15'(da[62:52]) + 15'd15360, da[51:0], 60'd0}, {1'b0, 15'(db[62:52]) + 15'd15360, db[51:0], 60'd0});
      ps = {1'b1, da[51:0]} * {1'b1, db[51:0]};
      checks++;
      if ((ps[105] ? {ps[104:0], 7'd0} : {ps[103:0], 8'd0}) !== result[111:0]) begin
        failures++;
        $display("FAIL qp exact product a=%h b=%h result=%h", da, db, result);
      end
    end
    for (int i = 0; i < 10000; i++) check(W'(rand_operand(EW, FW, 0)), W'(rand_operand(EW, FW, 0)));
    for (int i = 0; i < 10000; i++) check(W'(rand_operand(EW, FW, 1)), W'(rand_operand(EW, FW, 1)));
    for (int i = 0; i < 10000; i++) check(W'(rand_operand(EW, FW, 2)), W'(rand_operand(EW, FW, 0)));
    for (int i = 0; i < 10000 / 4; i++) check(W'(rand_operand(EW, FW, 3)), W'(rand_operand(EW, FW, $urandom_range(0, 3))));
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

// tb_mul114x114: self-checking testbench for the 114x114 bit multiplier.
//
// The reference is one 228-bit product computed by the testbench. Besides
// random operands it applies all-ones halves (the largest value of each of
// the four 57x57 half products), single set bits across both halves and
// quadruple precision significands (113 bits with the top one set, one zero
// bit above). One operand pair per clock; a watchdog ends the run with a
// failure if it has not finished in time.
module tb_mul114x114;
  import civp_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [QP_SIG_W-1:0]   a, b;
  logic [2*QP_SIG_W-1:0] p;
  int checks = 0, failures = 0;

  mul114x114 dut (.a(a), .b(b), .p(p));

  localparam logic [QP_SIG_W-1:0] HI = {{DP_SIG_W{1'b1}}, {DP_SIG_W{1'b0}}};
  localparam logic [QP_SIG_W-1:0] LO = {{DP_SIG_W{1'b0}}, {DP_SIG_W{1'b1}}};

  task automatic check(input logic [QP_SIG_W-1:0] ta, input logic [QP_SIG_W-1:0] tbv);
    logic [2*QP_SIG_W-1:0] expected;
    a = ta; b = tbv;
    @(posedge clk);
    expected = (2*QP_SIG_W)'(ta) * (2*QP_SIG_W)'(tbv);
    checks++;
    if (p !== expected) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h p=%h expected=%h", ta, tbv, p, expected);
    end
  endtask

  function automatic logic [QP_SIG_W-1:0] rand114();
    return {$urandom(), $urandom(), $urandom(), $urandom()};
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check('0, '0);
    check('1, '1);
    check(HI, HI); check(HI, LO); check(LO, HI); check(LO, LO);
    check(HI, '1); check('1, LO);
    for (int i = 0; i < QP_SIG_W; i += 5)
      for (int j = 0; j < QP_SIG_W; j += 7)
        check(QP_SIG_W'(1) << i, QP_SIG_W'(1) << j);
    for (int i = 0; i < 10000; i++) check(rand114(), rand114());
    for (int i = 0; i < 3000; i++)
      check({1'b0, 1'b1, 112'(rand114())}, {1'b0, 1'b1, 112'(rand114())});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mul24x9: self-checking testbench for the 24x9 bit unsigned multiplier block.
//
// Applies the corner operands (zero, one, all ones, single set bits) and
// 20000 random operand pairs, one pair per clock, and compares p with a
// product computed in 64-bit integer arithmetic. A watchdog ends the run
// with a failure if it has not finished within a fixed number of cycles.
module tb_mul24x9;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [24-1:0] a;
  logic [9-1:0] b;
  logic [33-1:0] p;
  int checks = 0, failures = 0;

  mul24x9 dut (.a(a), .b(b), .p(p));

  task automatic check(input logic [24-1:0] ta, input logic [9-1:0] tb);
    longint unsigned expected;
    a = ta; b = tb;
    @(posedge clk);
    expected = longint'(ta) * longint'(tb);
    checks++;
    if (64'(p) !== expected) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h p=%h expected=%h", ta, tb, p, expected);
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
    check('0, '0);
    check('1, '1);
    check('1, 1);
    check(1, '1);
    for (int i = 0; i < 24; i++)
      for (int j = 0; j < 9; j++)
        check(24'(1) << i, 9'(1) << j);
    for (int i = 0; i < 20000; i++)
      check(24'($urandom()), 9'($urandom()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mul57x57: self-checking testbench for the 57x57 bit multiplier.
//
// The reference is a single 114-bit product computed by the testbench, so
// it does not share the slicing of the unit under test. Besides random
// operands it applies patterns aimed at each of the nine slice products:
// all-ones in one slice of a and one slice of b (the largest value each
// slice product can take, so a wrong weight or a dropped carry shows), and
// all single-bit operand pairs. One operand pair is applied per clock; a
// watchdog ends the run with a failure if it has not finished in time.
module tb_mul57x57;
  import civp_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [DP_SIG_W-1:0]   a, b;
  logic [2*DP_SIG_W-1:0] p;
  int checks = 0, failures = 0;

  mul57x57 dut (.a(a), .b(b), .p(p));

  // Slice masks, A1 (9 bits) at the top, A3 (24 bits) at the bottom.
  localparam logic [DP_SIG_W-1:0] SLICE [3] = '{
    {{9{1'b1}}, 48'd0},
    {9'd0, {24{1'b1}}, 24'd0},
    {33'd0, {24{1'b1}}}
  };

  task automatic check(input logic [DP_SIG_W-1:0] ta, input logic [DP_SIG_W-1:0] tbv);
    logic [2*DP_SIG_W-1:0] expected;
    a = ta; b = tbv;
    @(posedge clk);
    expected = (2*DP_SIG_W)'(ta) * (2*DP_SIG_W)'(tbv);
    checks++;
    if (p !== expected) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h p=%h expected=%h", ta, tbv, p, expected);
    end
  endtask

  function automatic logic [DP_SIG_W-1:0] rand57();
    return {$urandom(), $urandom()};
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
    check('1, 1);
    // One slice of a against one slice of b, all ones: exercises each of
    // the nine partial products at full value.
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        check(SLICE[i], SLICE[j]);
        check(SLICE[i] | SLICE[(i + 1) % 3], '1);
      end
    // Single set bits: every weight of every partial product.
    for (int i = 0; i < DP_SIG_W; i += 2)
      for (int j = 0; j < DP_SIG_W; j += 3)
        check(DP_SIG_W'(1) << i, DP_SIG_W'(1) << j);
    for (int i = 0; i < 20000; i++) check(rand57(), rand57());
    // Double precision significands: 53 bits, top one set, 4 zero bits above.
    for (int i = 0; i < 5000; i++)
      check({4'b0, 1'b1, 52'(rand57())}, {4'b0, 1'b1, 52'(rand57())});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

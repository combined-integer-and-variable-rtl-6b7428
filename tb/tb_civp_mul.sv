// tb_civp_mul: end-to-end testbench of the combined multiplier, at its
// default (and only) configuration.
//
// A stream of operations in random modes (24-bit integer, binary32,
// binary64, binary128) is applied, mostly back to back, with idle cycles in
// between. Each result is expected exactly one clock after its operands,
// with out_valid and out_mode, and is compared with a reference computed
// by the testbench: a 48-bit integer product, or tb_fp_ref_pkg::ref_mul for
// the floating point modes; the unused upper result bits must be zero.
// During idle cycles out_valid must be low and the last result must be
// held. The testbench counts each mode, each change of mode between
// consecutive operations, overflow, underflow and invalid results and idle
// cycles, and fails if any of them never happened. A watchdog ends a run
// that does not finish in time.
module tb_civp_mul;
  import civp_pkg::*;
  import tb_fp_ref_pkg::*;

  localparam int N_OPS = 20000;

  logic         clk = 1'b0;
  logic         rst_n;
  logic         in_valid;
  civp_mode_e   mode;
  logic [127:0] a, b;
  logic         out_valid;
  civp_mode_e   out_mode;
  logic [127:0] result;
  fp_flags_t    flags;

  always #5 clk = ~clk;

  civp_mul dut (.*);

  int checks = 0, failures = 0;
  int n_mode [4] = '{default: 0};
  int n_switch = 0, n_ovf = 0, n_unf = 0, n_inv = 0, n_idle = 0;

  // Expected output of the operation taken at the last clock edge.
  logic         exp_valid;
  civp_mode_e   exp_mode;
  logic [127:0] exp_result;
  logic [2:0]   exp_flags;

  function automatic logic [127:0] operand(input civp_mode_e m);
    int kind = ($urandom_range(0, 9) < 6) ? 0 : int'($urandom_range(1, 3));
    case (m)
      MODE_INT24: return 128'(rand128() & 128'hff_ffff);
      MODE_SP:    return 128'(32'(rand_operand(SP_EXP_W, SP_FRAC_W, kind)));
      MODE_DP:    return 128'(64'(rand_operand(DP_EXP_W, DP_FRAC_W, kind)));
      default:    return rand_operand(QP_EXP_W, QP_FRAC_W, kind);
    endcase
  endfunction

  task automatic expect_of(input civp_mode_e m, input logic [127:0] ta, input logic [127:0] tbv);
    exp_mode = m;
    exp_flags = '0;
    case (m)
      MODE_INT24: exp_result = 128'(48'(ta[23:0]) * 48'(tbv[23:0]));
      MODE_SP:    exp_result = 128'(32'(ref_mul(ta, tbv, SP_EXP_W, SP_FRAC_W, exp_flags)));
      MODE_DP:    exp_result = 128'(64'(ref_mul(ta, tbv, DP_EXP_W, DP_FRAC_W, exp_flags)));
      default:    exp_result = ref_mul(ta, tbv, QP_EXP_W, QP_FRAC_W, exp_flags);
    endcase
  endtask

  // Checks what the unit shows one clock after an edge.
  task automatic check_output(input logic was_valid);
    checks++;
    if (out_valid !== was_valid) begin
      failures++;
      $display("FAIL out_valid=%b expected %b", out_valid, was_valid);
    end
    if (!was_valid) return;
    checks++;
    if (out_mode !== exp_mode || result !== exp_result || flags !== fp_flags_t'(exp_flags)) begin
      failures++;
      if (failures < 10)
        $display("FAIL mode=%s result=%h flags=%b expected mode=%s result=%h flags=%b",
                 out_mode.name(), result, flags, exp_mode.name(), exp_result, exp_flags);
    end
    if (flags.overflow)  n_ovf++;
    if (flags.underflow) n_unf++;
    if (flags.invalid)   n_inv++;
  endtask

  initial begin
    repeat (10 * N_OPS + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    civp_mode_e   m, last_m;
    logic [127:0] ta, tbv, held;
    rst_n    = 1'b0;
    in_valid = 1'b0;
    mode     = MODE_INT24;
    a        = '0;
    b        = '0;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (out_valid !== 1'b0 || result !== '0) begin
      failures++;
      $display("FAIL reset state");
    end
    rst_n  = 1'b1;
    last_m = MODE_INT24;
    for (int i = 0; i < N_OPS; i++) begin
      if ($urandom_range(0, 9) == 0) begin
        // Idle cycle: operands change, nothing is taken, result is held.
        held     = result;
        in_valid = 1'b0;
        mode     = civp_mode_e'($urandom_range(0, 3));
        a        = rand128();
        b        = rand128();
        @(posedge clk);
        #1;
        check_output(1'b0);
        checks++;
        if (result !== held) begin
          failures++;
          $display("FAIL result changed during an idle cycle");
        end
        n_idle++;
      end
      // Runs of the same mode, then a switch.
      m = ($urandom_range(0, 3) == 0) ? civp_mode_e'($urandom_range(0, 3)) : last_m;
      if (i == 0) m = MODE_INT24;
      if (m != last_m) n_switch++;
      last_m = m;
      ta  = operand(m);
      tbv = operand(m);
      // Upper operand bits beyond the format carry junk: they must be ignored.
      case (m)
        MODE_INT24: begin ta[127:24] = rand128()[103:0]; tbv[127:24] = rand128()[103:0]; end
        MODE_SP:    begin ta[127:32] = rand128()[95:0];  tbv[127:32] = rand128()[95:0];  end
        MODE_DP:    begin ta[127:64] = rand128()[63:0];  tbv[127:64] = rand128()[63:0];  end
        default: ;
      endcase
      in_valid = 1'b1;
      mode     = m;
      a        = ta;
      b        = tbv;
      expect_of(m, ta, tbv);
      n_mode[m]++;
      @(posedge clk);
      #1;
      check_output(1'b1);
    end
    in_valid = 1'b0;
    @(posedge clk);
    #1;
    check_output(1'b0);

    $display("ops int24 %0d sp %0d dp %0d qp %0d, mode switches %0d, idle %0d, overflow %0d, underflow %0d, invalid %0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_switch, n_idle, n_ovf, n_unf, n_inv);
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (n_mode[k] == 0) begin
        failures++;
        $display("FAIL mode %0d never used", k);
      end
    end
    checks++;
    if (n_switch == 0 || n_idle == 0 || n_ovf == 0 || n_unf == 0 || n_inv == 0) begin
      failures++;
      $display("FAIL a mode switch, idle cycle or exception never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

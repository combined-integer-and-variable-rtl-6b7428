// civp_mul: combined integer and variable precision (CIVP) multiplier.
//
// One unit that multiplies 24-bit unsigned integers or IEEE 754 single,
// double or quadruple precision numbers, all from the same three kinds of
// dedicated multiplier blocks (24x24, 24x9 and 9x9 bit):
//   MODE_INT24  one 24x24 block,                      product in result[47:0]
//   MODE_SP     one 24x24 block (sp_fpmul),           result[31:0]
//   MODE_DP     4 x 24x24, 4 x 24x9, 1 x 9x9 (dp_fpmul), result[63:0]
//   MODE_QP     16 x 24x24, 16 x 24x9, 4 x 9x9 (qp_fpmul), result[127:0]
// Operands are right-aligned in a and b the same way; unused upper result
// bits are zero. The architecture names the formats and the block counts
// but no way of sharing blocks between modes, nor any interface, so this
// unit keeps one datapath per mode and selects the result by mode. The
// operands of the modes not selected are held at zero (operand isolation)
// so that idle datapaths do not toggle. flags is zero in MODE_INT24.
//
// Timing: the datapaths are combinational; the operands are sampled when
// in_valid is high and the result appears one clock later with out_valid,
// a latency of one cycle and a throughput of one product per cycle. The
// registers, the valid handshake and the active-low synchronous reset are
// this design's own choice.
module civp_mul
  import civp_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  civp_mode_e   mode,
  input  logic [127:0] a,
  input  logic [127:0] b,
  output logic         out_valid,
  output civp_mode_e   out_mode,
  output logic [127:0] result,
  output fp_flags_t    flags
);
  // Operand isolation: each datapath sees its operands only in its mode.
  logic [23:0]  int_a, int_b;
  logic [31:0]  sp_a, sp_b;
  logic [63:0]  dp_a, dp_b;
  logic [127:0] qp_a, qp_b;

  always_comb begin
    int_a = (mode == MODE_INT24) ? a[23:0] : '0;
    int_b = (mode == MODE_INT24) ? b[23:0] : '0;
    sp_a  = (mode == MODE_SP)    ? a[31:0] : '0;
    sp_b  = (mode == MODE_SP)    ? b[31:0] : '0;
    dp_a  = (mode == MODE_DP)    ? a[63:0] : '0;
    dp_b  = (mode == MODE_DP)    ? b[63:0] : '0;
    qp_a  = (mode == MODE_QP)    ? a       : '0;
    qp_b  = (mode == MODE_QP)    ? b       : '0;
  end

  logic [47:0]  int_p;
  logic [31:0]  sp_r;
  logic [63:0]  dp_r;
  logic [127:0] qp_r;
  fp_flags_t    sp_f, dp_f, qp_f;

  mul24x24 u_int  (.a(int_a), .b(int_b), .p(int_p));
  sp_fpmul u_sp   (.a(sp_a), .b(sp_b), .result(sp_r), .flags(sp_f));
  dp_fpmul u_dp   (.a(dp_a), .b(dp_b), .result(dp_r), .flags(dp_f));
  qp_fpmul u_qp   (.a(qp_a), .b(qp_b), .result(qp_r), .flags(qp_f));

  logic [127:0] res_d;
  fp_flags_t    flags_d;
  always_comb begin
    unique case (mode)
      MODE_INT24: begin res_d = 128'(int_p); flags_d = '0;   end
      MODE_SP:    begin res_d = 128'(sp_r);  flags_d = sp_f; end
      MODE_DP:    begin res_d = 128'(dp_r);  flags_d = dp_f; end
      default:    begin res_d = qp_r;        flags_d = qp_f; end
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_mode  <= MODE_INT24;
      result    <= '0;
      flags     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_mode <= mode;
        result   <= res_d;
        flags    <= flags_d;
      end
    end
  end

  // A result is announced exactly one cycle after its operands were taken.
  property p_one_cycle_latency;
    @(posedge clk) disable iff (!rst_n) in_valid |=> out_valid;
  endproperty
  a_one_cycle_latency: assert property (p_one_cycle_latency);
endmodule

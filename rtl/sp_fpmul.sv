// sp_fpmul: IEEE 754 single precision (binary32) multiplier.
//
// Its 24x24 bit significand product, the core of a single precision
// multiplication, is formed by one dedicated 24x24 bit multiplier block;
// this is the case that motivates putting 24x24 blocks into the FPGA in
// place of 18x18 ones. Sign, exponent, normalisation, rounding (to nearest,
// ties to even) and special values are handled by fp_mul_round, whose rules
// are this design's own choice.
//
// Interface: a, b (32 bits: sign[31], exponent[30:23], fraction[22:0]) ->
// result (32 bits) and flags. Combinational.
module sp_fpmul
  import civp_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] result,
  output fp_flags_t   flags
);
  logic [23:0] sig_a, sig_b;
  logic [47:0] prod;

  mul24x24 u_sig_mul (.a(sig_a), .b(sig_b), .p(prod));

  fp_mul_round #(.EXP_W(SP_EXP_W), .FRAC_W(SP_FRAC_W)) u_round (
    .a(a), .b(b), .sig_a(sig_a), .sig_b(sig_b), .prod(prod),
    .result(result), .flags(flags)
  );
endmodule

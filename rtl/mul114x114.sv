// mul114x114: 114x114 bit unsigned multiplier built from four 57x57 units.
//
// Each operand is split into two 57-bit halves, A = {A1, A2} and
// B = {B1, B2} with A1 and B1 the upper halves. The four half products
// A2*B2, A1*B2, A2*B1 and A1*B1 come from four mul57x57 units, each of which
// is itself four 24x24, four 24x9 and one 9x9 block, so the whole array holds
// 16 24x24, 16 24x9 and 4 9x9 blocks. The half products are added at
// weights 0, 57, 57 and 114. The architecture does not describe this final
// addition; it is written as one multi-operand sum.
//
// Interface: a, b (114 bits, unsigned) -> p (228 bits). Combinational.
module mul114x114
  import civp_pkg::*;
(
  input  logic [QP_SIG_W-1:0]   a,
  input  logic [QP_SIG_W-1:0]   b,
  output logic [2*QP_SIG_W-1:0] p
);
  localparam int unsigned PW = 2 * QP_SIG_W;

  logic [DP_SIG_W-1:0] a1, a2, b1, b2;
  assign {a1, a2} = a;
  assign {b1, b2} = b;

  logic [2*DP_SIG_W-1:0] p22, p12, p21, p11;

  mul57x57 u_a2b2 (.a(a2), .b(b2), .p(p22));
  mul57x57 u_a1b2 (.a(a1), .b(b2), .p(p12));
  mul57x57 u_a2b1 (.a(a2), .b(b1), .p(p21));
  mul57x57 u_a1b1 (.a(a1), .b(b1), .p(p11));

  always_comb begin
    p =   PW'(p22)
        + (PW'(p12) << DP_SIG_W) + (PW'(p21) << DP_SIG_W)
        + (PW'(p11) << (2 * DP_SIG_W));
  end
endmodule

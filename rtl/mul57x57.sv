// mul57x57: 57x57 bit unsigned multiplier built from nine dedicated blocks.
//
// Each operand is cut, from the most significant end, into a 9-bit slice and
// two 24-bit slices: A = {A1, A2, A3}, B = {B1, B2, B3}. The nine slice
// products are formed by four 24x24 blocks (A3*B3, A2*B3, A3*B2, A2*B2),
// four 24x9 blocks (A1*B3, A1*B2, A3*B1, A2*B1) and one 9x9 block (A1*B1),
// exactly the partition and block assignment of the architecture. The slice
// products are then added at their weights (0, 24, 48, 72 and 96 bits). The
// architecture does not say how the partial products are summed; this module
// uses one plain multi-operand addition and leaves the adder structure to
// synthesis.
//
// Interface: a, b (57 bits, unsigned) -> p (114 bits). Combinational.
module mul57x57
  import civp_pkg::*;
(
  input  logic [DP_SIG_W-1:0]   a,
  input  logic [DP_SIG_W-1:0]   b,
  output logic [2*DP_SIG_W-1:0] p
);
  localparam int unsigned PW = 2 * DP_SIG_W;

  // Operand slices, most significant first.
  logic [NARROW_W-1:0] a1, b1;
  logic [WIDE_W-1:0]   a2, a3, b2, b3;
  assign {a1, a2, a3} = a;
  assign {b1, b2, b3} = b;

  // Slice products.
  logic [2*WIDE_W-1:0]         p33, p23, p32, p22;  // 24x24
  logic [WIDE_W+NARROW_W-1:0]  p13, p12, p31, p21;  // 24x9
  logic [2*NARROW_W-1:0]       p11;                 // 9x9

  mul24x24 u_a3b3 (.a(a3), .b(b3), .p(p33));
  mul24x24 u_a2b3 (.a(a2), .b(b3), .p(p23));
  mul24x24 u_a3b2 (.a(a3), .b(b2), .p(p32));
  mul24x24 u_a2b2 (.a(a2), .b(b2), .p(p22));
  mul24x9  u_a1b3 (.a(b3), .b(a1), .p(p13));
  mul24x9  u_a1b2 (.a(b2), .b(a1), .p(p12));
  mul24x9  u_a3b1 (.a(a3), .b(b1), .p(p31));
  mul24x9  u_a2b1 (.a(a2), .b(b1), .p(p21));
  mul9x9   u_a1b1 (.a(a1), .b(b1), .p(p11));

  // Weights: A3/B3 at bit 0, A2/B2 at bit 24, A1/B1 at bit 48.
  always_comb begin
    p =   PW'(p33)
        + (PW'(p23) << WIDE_W)       + (PW'(p32) << WIDE_W)
        + (PW'(p22) << (2 * WIDE_W))
        + (PW'(p13) << (2 * WIDE_W)) + (PW'(p31) << (2 * WIDE_W))
        + (PW'(p12) << (3 * WIDE_W)) + (PW'(p21) << (3 * WIDE_W))
        + (PW'(p11) << (4 * WIDE_W));
  end
endmodule

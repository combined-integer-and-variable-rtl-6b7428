// mul24x9: the dedicated 24x9 bit unsigned multiplier block.
//
// The CIVP architecture replaces an FPGA's 25x18 bit hard multipliers with
// 24x9 bit ones. They form the products of a 24-bit operand slice with the
// 9-bit top slice of the other operand in the 57x57 bit array. As a hard
// block its inside is not specified; it is written as one behavioural product.
//
// Interface: a (24 bits), b (9 bits), unsigned -> p (33 bits). Combinational.
module mul24x9 (
  input  logic [23:0] a,
  input  logic [8:0]  b,
  output logic [32:0] p
);
  always_comb p = 33'(a) * 33'(b);
endmodule

// mul24x24: the dedicated 24x24 bit unsigned multiplier block.
//
// The CIVP architecture replaces an FPGA's 18x18 bit hard multipliers with
// 24x24 bit ones, so that a single precision significand product (two 24-bit
// significands, hidden one included) needs exactly one block. Being a hard
// block, its inside is not part of the architecture: here it is written as a
// single behavioural product that synthesis maps to whatever multiplier the
// target offers.
//
// Interface: a, b (24 bits, unsigned) -> p (48 bits). Purely combinational,
// no clock; any pipelining would belong to the block's implementation.
module mul24x24 (
  input  logic [23:0] a,
  input  logic [23:0] b,
  output logic [47:0] p
);
  always_comb p = 48'(a) * 48'(b);
endmodule

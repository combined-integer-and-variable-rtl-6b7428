// mul9x9: the 9x9 bit unsigned multiplier block that FPGAs already provide.
//
// The CIVP architecture keeps these blocks; in the 57x57 bit array one of
// them multiplies the two 9-bit top slices. As a hard block its inside is not
// specified; it is written as one behavioural product.
//
// Interface: a, b (9 bits, unsigned) -> p (18 bits). Combinational.
module mul9x9 (
  input  logic [8:0]  a,
  input  logic [8:0]  b,
  output logic [17:0] p
);
  always_comb p = 18'(a) * 18'(b);
endmodule

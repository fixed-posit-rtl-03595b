// fxp_sign_xor -- sign of the product (block 1 of the multiplier).
//
// The fixed-posit word is sign-magnitude, as in the value formula
// (-1)^s * ..., so the sign of a product is the exclusive OR of the operand
// signs: sc = sa ^ sb. The XOR is the design's own first step; treating the
// word as sign-magnitude (no two's-complement negation as in standard posits)
// is this implementation's reading of it. Purely combinational, zero latency.
module fxp_sign_xor (
  input  logic sa,   // sign of operand A
  input  logic sb,   // sign of operand B
  output logic sc    // sign of the result C
);

  always_comb sc = sa ^ sb;

endmodule

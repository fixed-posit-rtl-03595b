// fxp_frac_mult -- fraction multiplier and normaliser (block 3).
//
// Both significands carry the hidden one: 1.fa * 1.fb lies in [1, 4). The
// (FS+1) x (FS+1) unsigned product is 2*FS+2 bits wide; its top bit is the
// carry. When the carry is set the product is in [2, 4) and the fraction of
// the result is taken one place further left, which normalises it back to
// [1, 2); the carry is passed to the exponent adder. The bits below the kept
// FS fraction bits are dropped (truncation toward zero). Multiply, normalise
// and carry follow the design description; truncation is this
// implementation's choice, as no rounding stage is described. Purely
// combinational.
//
// Ports: fa, fb (FS fraction bits each), fc (FS bits), carry.
module fxp_frac_mult #(
  parameter int unsigned FS = 23
) (
  input  logic [FS-1:0] fa,
  input  logic [FS-1:0] fb,
  output logic [FS-1:0] fc,
  output logic          carry
);

  logic [2*FS+1:0] prod;

  always_comb begin
    prod  = {1'b1, fa} * {1'b1, fb};
    carry = prod[2*FS+1];
    fc    = carry ? prod[2*FS -: FS] : prod[2*FS-1 -: FS];
  end

endmodule

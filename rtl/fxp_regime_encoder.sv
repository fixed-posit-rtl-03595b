// fxp_regime_encoder -- k value to regime field (block 5).
//
// For k >= 0 the regime is k+1 ones followed by zeros; for k < 0 it is -k
// zeros followed by ones; the field is RS bits wide, so k = RS-1 gives all
// ones and k = -RS all zeros. A k outside [-RS, RS-1] cannot be encoded: the
// encoder raises ovf (k too large) or unf (k too small), and the multiplier
// then saturates. The thermometer encoding follows the format definition;
// the range flags and saturation are this implementation's own choice.
// Purely combinational.
//
// Ports: kc (signed k of the result, KCW bits), rc (RS regime bits),
//        ovf, unf.
module fxp_regime_encoder
  import fxp_pkg::*;
#(
  parameter int unsigned RS  = FXP_RS,
  parameter int unsigned KCW = k_bits(RS) + 2
) (
  input  logic signed [KCW-1:0] kc,
  output logic [RS-1:0]         rc,
  output logic                  ovf,
  output logic                  unf
);

  int kv;

  always_comb begin
    kv  = int'(kc);
    ovf = kv > int'(RS) - 1;
    unf = kv < -int'(RS);
    for (int j = 0; j < int'(RS); j++) begin
      // position counted from the MSB of the field
      if (kv >= 0) rc[RS-1-j] = (j <= kv);
      else         rc[RS-1-j] = (j >= -kv);
    end
    // a k value cannot be both above and below the legal range
    assert (!(ovf && unf)) else $error("ovf and unf both set for k=%0d", kv);
  end

endmodule

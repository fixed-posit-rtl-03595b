// fxp_regime_decoder -- regime field to k value (block 2 of the multiplier).
//
// The regime field holds a run of m equal bits starting at its most
// significant bit. A run of zeros gives k = -m and a run of ones k = m-1,
// the same rule as for a conventional posit; in a well-formed fixed-posit the
// bits after the run are all the complement (a thermometer code), and any bits
// after the first complement bit are ignored here. The decoder then shifts k
// left by ES places, which gives the regime's contribution k * 2^ES to the
// binary scale of the operand.
//
// The decoding rule and the shift by ES follow the design description. The
// description suggests shift registers for this step; this combinational
// version instead uses a comparison chain, which is its own choice.
// Because the regime has a fixed width RS, the run length is found by a short
// fixed-length comparison chain over RS bits, with no leading-zero/one counter
// over the whole word. Purely combinational, zero latency.
//
// Ports: r (RS regime bits, MSB first), k (signed, KW bits) and
// sk = k << ES (signed, KW+ES bits). The low ES bits of sk are zero by
// construction.
module fxp_regime_decoder
  import fxp_pkg::*;
#(
  parameter int unsigned ES = FXP_ES,
  parameter int unsigned RS = FXP_RS,
  localparam int unsigned KW  = k_bits(RS),
  localparam int unsigned SKW = sk_bits(ES, RS)
) (
  input  logic [RS-1:0]         r,
  output logic signed [KW-1:0]  k,
  output logic signed [SKW-1:0] sk
);

  logic [KW-1:0] run;   // length of the leading run, 1 .. RS
  logic          ended; // first complement bit seen

  always_comb begin
    run   = KW'(1);
    ended = 1'b0;
    for (int i = int'(RS) - 2; i >= 0; i--) begin
      if (!ended && (r[i] == r[RS-1])) run = run + KW'(1);
      else                             ended = 1'b1;
    end
    // ones: k = m - 1; zeros: k = -m
    k  = r[RS-1] ? signed'(run - KW'(1)) : signed'(-run);
    sk = signed'({k, ES'(0)});
  end

endmodule

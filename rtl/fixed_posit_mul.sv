// fixed_posit_mul -- (N, ES, RS) fixed-posit multiplier, C = A * B.
//
// A fixed-posit is a posit whose regime and exponent fields have fixed
// widths, so every field sits at a fixed bit position and both operands can
// be split and decoded in parallel, as in an IEEE-754 multiplier. The
// datapath follows the five-step structure of the design:
//   1. fxp_sign_xor       sc = sa ^ sb
//   2. fxp_regime_decoder k of each operand, shifted left by ES
//   3. fxp_frac_mult      1.fa * 1.fb, normalised to fc and a carry
//   4. fxp_exp_adder      ea + eb + (ka<<ES) + (kb<<ES) + carry -> ec, kc
//   5. fxp_regime_encoder kc -> regime bits rc
// and C = {sc, rc, ec, fc}. Default configuration (32, 6, 2).
//
// Choices of this implementation where the design description is silent:
//   * Zero is the all-zero word and NaR (not a real) is a one followed by
//     zeros, the posit conventions. NaR times anything is NaR; zero times a
//     real is zero (with sign bit 0).
//   * A result whose scale exceeds the largest representable one saturates
//     to the largest magnitude (all magnitude bits ones) with sign sc; a
//     result below the smallest one saturates to the smallest nonzero
//     magnitude (magnitude 0...01). A fixed-posit thus never overflows to NaR
//     or underflows to zero, like a posit. A result whose magnitude bits would
//     be all zero (exactly 2^(-RS*2^ES)) collides with the zero/NaR patterns
//     and is also returned as the smallest nonzero magnitude.
//   * Fraction bits beyond FS are truncated.
//   * The multiplier is combinational: c, ovf and unf follow a and b with no
//     clock and no latency. ovf/unf flag a saturated result.
module fixed_posit_mul
  import fxp_pkg::*;
#(
  parameter int unsigned N  = FXP_N,
  parameter int unsigned ES = FXP_ES,
  parameter int unsigned RS = FXP_RS
) (
  input  logic [N-1:0] a,    // operand A
  input  logic [N-1:0] b,    // operand B
  output logic [N-1:0] c,    // product C
  output logic         ovf,  // result saturated to the largest magnitude
  output logic         unf   // result saturated to the smallest magnitude
);

  localparam int unsigned FS  = frac_bits(N, ES, RS);
  localparam int unsigned KW  = k_bits(RS);
  localparam int unsigned SKW = sk_bits(ES, RS);
  localparam int unsigned SW  = sum_bits(ES, RS);

  localparam logic [N-1:0] ZERO = '0;
  localparam logic [N-1:0] NAR  = {1'b1, {(N-1){1'b0}}};

  // ---- field split ------------------------------------------------------
  logic          sa, sb;
  logic [RS-1:0] ra, rb;
  logic [ES-1:0] ea, eb;
  logic [FS-1:0] fa, fb;

  assign sa = a[N-1];
  assign sb = b[N-1];
  assign ra = a[N-2 -: RS];
  assign rb = b[N-2 -: RS];
  assign ea = a[FS+ES-1 -: ES];
  assign eb = b[FS+ES-1 -: ES];
  assign fa = a[FS-1:0];
  assign fb = b[FS-1:0];

  // ---- 1: sign ----------------------------------------------------------
  logic sc;
  fxp_sign_xor u_sign (.sa(sa), .sb(sb), .sc(sc));

  // ---- 2: regime decoders -----------------------------------------------
  logic signed [KW-1:0]  ka, kb;
  logic signed [SKW-1:0] ska, skb;
  fxp_regime_decoder #(.ES(ES), .RS(RS)) u_dec_a (.r(ra), .k(ka), .sk(ska));
  fxp_regime_decoder #(.ES(ES), .RS(RS)) u_dec_b (.r(rb), .k(kb), .sk(skb));

  // ---- 3: fraction multiplier -------------------------------------------
  logic [FS-1:0] fc;
  logic          carry;
  fxp_frac_mult #(.FS(FS)) u_fmul (.fa(fa), .fb(fb), .fc(fc), .carry(carry));

  // ---- 4: scale adder ---------------------------------------------------
  logic [ES-1:0]           ec;
  logic signed [SW-ES-1:0] kc;
  fxp_exp_adder #(.ES(ES), .RS(RS)) u_add (
    .ska(ska), .skb(skb), .ea(ea), .eb(eb), .carry(carry), .ec(ec), .kc(kc)
  );

  // ---- 5: regime encoder ------------------------------------------------
  logic [RS-1:0] rc;
  logic          enc_ovf, enc_unf;
  fxp_regime_encoder #(.RS(RS), .KCW(SW-ES)) u_enc (
    .kc(kc), .rc(rc), .ovf(enc_ovf), .unf(enc_unf)
  );

  // ---- special values and saturation --------------------------------------
  logic          a_zero, b_zero, a_nar, b_nar;
  logic [N-2:0]  mag;
  logic          mag_zero;

  always_comb begin
    a_zero   = (a == ZERO);
    b_zero   = (b == ZERO);
    a_nar    = (a == NAR);
    b_nar    = (b == NAR);
    mag      = {rc, ec, fc};
    mag_zero = (mag == '0);
    ovf      = 1'b0;
    unf      = 1'b0;
    if (a_nar || b_nar) begin
      c = NAR;
    end else if (a_zero || b_zero) begin
      c = ZERO;
    end else if (enc_ovf) begin
      ovf = 1'b1;
      c   = {sc, {(N-1){1'b1}}};
    end else if (enc_unf || mag_zero) begin
      unf = 1'b1;
      c   = {sc, (N-1)'(1)};
    end else begin
      c = {sc, mag};
    end
  end

  // Decoded k values are used only through their shifted forms.
  logic unused_k;
  assign unused_k = ^{ka, kb};

endmodule

// fxp_exp_adder -- scale adder (block 4).
//
// Adds the two shifted k values (k * 2^ES), the two unsigned exponents and the
// carry from the fraction multiplier. The signed sum is the binary scale of
// the product. Its low ES bits are the result exponent ec; the bits above
// (the sum shifted right arithmetically by ES) are the result's k value,
// which the regime encoder turns into regime bits. The k output is wider than
// a legal k so that the encoder can see overflow and underflow. The single
// adder over all five terms and the split of its output follow the design
// description; the widths are this implementation's. Purely combinational.
//
// Ports: ska, skb (signed, SKW bits), ea, eb (ES bits), carry,
//        ec (ES bits), kc (signed, SW-ES bits).
module fxp_exp_adder
  import fxp_pkg::*;
#(
  parameter int unsigned ES = FXP_ES,
  parameter int unsigned RS = FXP_RS,
  localparam int unsigned SKW = sk_bits(ES, RS),
  localparam int unsigned SW  = sum_bits(ES, RS)
) (
  input  logic signed [SKW-1:0]   ska,
  input  logic signed [SKW-1:0]   skb,
  input  logic [ES-1:0]           ea,
  input  logic [ES-1:0]           eb,
  input  logic                    carry,
  output logic [ES-1:0]           ec,
  output logic signed [SW-ES-1:0] kc
);

  logic signed [SW-1:0] sum;

  always_comb begin
    sum = SW'(ska) + SW'(skb)
        + signed'(SW'({1'b0, ea})) + signed'(SW'({1'b0, eb}))
        + signed'(SW'({1'b0, carry}));
    ec  = sum[ES-1:0];
    kc  = sum[SW-1:ES];
  end

endmodule

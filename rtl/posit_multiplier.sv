// posit_multiplier: the PAU's MULTIPLIER unit.
//
// Multiplies two (N,ES) posits and hands the exact, still unrounded product to
// the shared normalizer as a sign/scale/fraction bundle (see posit_pkg). Both
// operands are decoded, the scales are added, the signs are XORed and the two
// (FB+1)-bit significands 1.f are multiplied exactly; the 2*(FB+1)-bit product,
// which lies in [1,4), is placed at the top of the FW-bit fraction field.
// NaR in either operand gives NaR; zero in either operand gives zero.
// Purely combinational, as the source states for its multiplier; rounding is
// done downstream by the normalizer, as in the source's block diagram. The
// decoding and the product layout are this design's choices.
module posit_multiplier
  import posit_pkg::*;
#(
  parameter int N     = 16,
  parameter int ES    = 2,
  parameter int INT_W = 32,
  parameter int FW    = bundle_fw(N, ES, INT_W),
  parameter int SW    = scale_w(N, ES, INT_W)
) (
  input  logic [N-1:0]         a_i,
  input  logic [N-1:0]         b_i,
  output logic                 nar_o,
  output logic                 zero_o,
  output logic                 sign_o,
  output logic signed [SW-1:0] scale_o,
  output logic [FW-1:0]        frac_o
);
  localparam int FB = frac_bits(N, ES);
  localparam int PW = 2 * (FB + 1);

  logic nar_a, nar_b, zero_a, zero_b, sign_a, sign_b;
  logic signed [SW-1:0] scale_a, scale_b;
  logic [FB-1:0] frac_a, frac_b;
  logic [PW-1:0] prod;

  posit_unpack #(.N(N), .ES(ES), .SW(SW)) u_ua (
    .posit_i(a_i), .nar_o(nar_a), .zero_o(zero_a), .sign_o(sign_a), .scale_o(scale_a), .frac_o(frac_a));
  posit_unpack #(.N(N), .ES(ES), .SW(SW)) u_ub (
    .posit_i(b_i), .nar_o(nar_b), .zero_o(zero_b), .sign_o(sign_b), .scale_o(scale_b), .frac_o(frac_b));

  assign prod    = PW'({1'b1, frac_a}) * PW'({1'b1, frac_b});
  assign nar_o   = nar_a | nar_b;
  assign zero_o  = ~(nar_a | nar_b) & (zero_a | zero_b);
  assign sign_o  = sign_a ^ sign_b;
  assign scale_o = scale_a + scale_b;
  assign frac_o  = {prod, {(FW - PW){1'b0}}};
endmodule

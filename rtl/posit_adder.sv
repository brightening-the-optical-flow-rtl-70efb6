// posit_adder: the PAU's ADD/SUB unit.
//
// Adds or subtracts (sub_i = 1) two (N,ES) posits and hands the unrounded
// result to the shared normalizer as a sign/scale/fraction bundle (see
// posit_pkg). Operation: decode both operands, flip B's sign for a subtraction,
// order the operands by magnitude, shift the smaller significand right by the
// scale difference, and add or subtract the significands in an FW-bit field
// with two integer bits. Bits shifted out are ORed into bit 0, which is
// otherwise always zero (a sticky or "jamming" bit). Because the field carries
// many more bits than the posit can keep, this keeps round-to-nearest-even in
// the normalizer exact. The result takes the larger operand's sign and scale. NaR in
// either operand gives NaR; an exact cancellation gives zero.
// Purely combinational, as the source states for its adder; the alignment
// scheme and widths are this design's choices.
module posit_adder
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
  input  logic                 sub_i,
  output logic                 nar_o,
  output logic                 zero_o,
  output logic                 sign_o,
  output logic signed [SW-1:0] scale_o,
  output logic [FW-1:0]        frac_o
);
  localparam int FB = frac_bits(N, ES);
  localparam int DW = $clog2(2 * FW + 1) + 1;   // shift distance, clamped

  logic nar_a, nar_b, zero_a, zero_b, sign_a, sign_b, sign_b_eff;
  logic signed [SW-1:0] scale_a, scale_b;
  logic [FB-1:0] frac_a, frac_b;

  posit_unpack #(.N(N), .ES(ES), .SW(SW)) u_ua (
    .posit_i(a_i), .nar_o(nar_a), .zero_o(zero_a), .sign_o(sign_a), .scale_o(scale_a), .frac_o(frac_a));
  posit_unpack #(.N(N), .ES(ES), .SW(SW)) u_ub (
    .posit_i(b_i), .nar_o(nar_b), .zero_o(zero_b), .sign_o(sign_b), .scale_o(scale_b), .frac_o(frac_b));

  logic [FW-1:0] sig_a, sig_b, sig_big, sig_small, small_al, sum;
  logic [2*FW-1:0] ext;
  logic signed [SW-1:0] scale_big, scale_small, diff;
  logic [DW-1:0] shift_dist;
  logic sign_big, sign_small, a_is_big;

  assign sign_b_eff = sign_b ^ sub_i;
  // significand 01.f, left-aligned below the two integer bits; bit 0 stays free
  assign sig_a = {2'b01, frac_a, {(FW - 2 - FB){1'b0}}};
  assign sig_b = {2'b01, frac_b, {(FW - 2 - FB){1'b0}}};

  always_comb begin
    a_is_big    = (scale_a > scale_b) || ((scale_a == scale_b) && (sig_a >= sig_b));
    sig_big     = a_is_big ? sig_a : sig_b;
    sig_small   = a_is_big ? sig_b : sig_a;
    scale_big   = a_is_big ? scale_a : scale_b;
    scale_small = a_is_big ? scale_b : scale_a;
    sign_big    = a_is_big ? sign_a : sign_b_eff;
    sign_small  = a_is_big ? sign_b_eff : sign_a;
    diff        = scale_big - scale_small;
    shift_dist        = (diff > SW'(2 * FW)) ? DW'(2 * FW) : DW'(diff);
    ext         = {sig_small, {FW{1'b0}}} >> shift_dist;
    small_al    = {ext[2*FW-1:FW+1], ext[FW] | (|ext[FW-1:0])};
    sum         = (sign_big == sign_small) ? sig_big + small_al : sig_big - small_al;
  end

  always_comb begin
    nar_o   = nar_a | nar_b;
    zero_o  = 1'b0;
    sign_o  = sign_big;
    scale_o = scale_big;
    frac_o  = sum;
    if (nar_a | nar_b) begin
      frac_o = '0;
    end else if (zero_a & zero_b) begin
      zero_o = 1'b1;
      sign_o = 1'b0;
    end else if (zero_a) begin            // 0 +/- B
      sign_o  = sign_b_eff;
      scale_o = scale_b;
      frac_o  = sig_b;
    end else if (zero_b) begin            // A +/- 0
      sign_o  = sign_a;
      scale_o = scale_a;
      frac_o  = sig_a;
    end else if (sum == '0) begin         // exact cancellation
      zero_o = 1'b1;
      sign_o = 1'b0;
    end
  end
endmodule

// int_posit_converter: the PAU's I2P/P2I unit (int2pos and pos2int).
//
// to_int_i = 0 (int2pos): the INT_W-bit two's-complement integer a_i becomes a
//   sign/scale/fraction bundle: magnitude |a_i| placed at the top of the FW-bit
//   fraction field with scale INT_W-2, so that the shared normalizer rounds it
//   to a posit like any other result.
// to_int_i = 1 (pos2int): the low N bits of a_i are decoded as a posit and
//   rounded to the nearest integer, ties to even. Results beyond the integer
//   range saturate to the largest or smallest integer, and NaR gives the smallest
//   integer (1 followed by zeros). The integer leaves on int_o and bypasses the
//   normalizer, as the "signed integer" path of the source's block diagram does.
// Purely combinational. The rounding, saturation and NaR rules are this
// design's choices; the source only names the two converters.
module int_posit_converter
  import posit_pkg::*;
#(
  parameter int N     = 16,
  parameter int ES    = 2,
  parameter int INT_W = 32,
  parameter int FW    = bundle_fw(N, ES, INT_W),
  parameter int SW    = scale_w(N, ES, INT_W)
) (
  input  logic [INT_W-1:0]     a_i,
  input  logic                 to_int_i,
  output logic                 nar_o,
  output logic                 zero_o,
  output logic                 sign_o,
  output logic signed [SW-1:0] scale_o,
  output logic [FW-1:0]        frac_o,
  output logic [INT_W-1:0]     int_o
);
  localparam int FB = frac_bits(N, ES);
  localparam int XW = INT_W + FB + 2;      // significand shifted into integer position
  localparam int SH = $clog2(INT_W + 1);

  // ---------------- int2pos ----------------
  logic [INT_W-1:0] imag;
  assign imag = a_i[INT_W-1] ? -a_i : a_i;

  // ---------------- pos2int ----------------
  logic p_nar, p_zero, p_sign;
  logic signed [SW-1:0] p_scale;
  logic [FB-1:0] p_frac;
  logic [XW-1:0] fixed;
  logic [INT_W:0] pmag;      // one extra bit to see a rounding carry past the range
  logic round_bit, sticky, round_up, too_big;
  logic [INT_W-1:0] pint;

  posit_unpack #(.N(N), .ES(ES), .SW(SW)) u_up (
    .posit_i(a_i[N-1:0]), .nar_o(p_nar), .zero_o(p_zero), .sign_o(p_sign), .scale_o(p_scale), .frac_o(p_frac));

  always_comb begin
    fixed     = '0;
    pmag      = '0;
    round_bit = 1'b0;
    sticky    = 1'b0;
    round_up  = 1'b0;
    too_big   = 1'b0;
    if (p_scale >= SW'(INT_W - 1)) begin
      too_big = 1'b1;                                  // |value| >= 2^(INT_W-1)
    end else if (p_scale >= -SW'(1)) begin
      // 1.f * 2^scale, shifted by scale+1 so that FB+1 fraction bits remain
      fixed     = XW'({1'b1, p_frac}) << SH'(p_scale + SW'(1));
      pmag      = (INT_W + 1)'(fixed >> (FB + 1));
      round_bit = fixed[FB];
      sticky    = |fixed[FB-1:0];
      round_up  = round_bit & (sticky | pmag[0]);
      pmag      = pmag + (INT_W + 1)'(round_up);
      too_big   = pmag[INT_W] | pmag[INT_W-1];
    end
    // |value| < 0.5 leaves pmag at zero
    if (p_nar) pint = {1'b1, {(INT_W - 1){1'b0}}};
    else if (p_zero) pint = '0;
    else if (too_big) pint = p_sign ? {1'b1, {(INT_W - 1){1'b0}}} : {1'b0, {(INT_W - 1){1'b1}}};
    else pint = p_sign ? -pmag[INT_W-1:0] : pmag[INT_W-1:0];
  end

  // ---------------- outputs ----------------
  always_comb begin
    nar_o   = 1'b0;
    zero_o  = 1'b0;
    sign_o  = 1'b0;
    scale_o = '0;
    frac_o  = '0;
    int_o   = '0;
    if (to_int_i) begin
      int_o = pint;
    end else begin
      zero_o  = ~|a_i;
      sign_o  = a_i[INT_W-1];
      scale_o = SW'(INT_W - 2);
      frac_o  = {imag, {(FW - INT_W){1'b0}}};
    end
  end
endmodule

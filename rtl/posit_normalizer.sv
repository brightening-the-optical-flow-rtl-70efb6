// posit_normalizer: the PAU's NORMALIZATION block, shared by all units.
//
// Takes the unrounded sign/scale/fraction bundle selected by the unit MUX (see
// posit_pkg: value = frac * 2^(scale-(FW-2))) and produces the N-bit posit.
//  1. A leading-zero count shifts the fraction until its top bit is one and
//     corrects the scale: s = scale + 1 - lz.
//  2. s is split into regime k = s >> ES (floor) and exponent e = s mod 2^ES.
//  3. The bit string {regime, e, fraction} is built by arithmetic right shift of
//     {10 or 01, e, fraction}, which repeats the first regime bit k+1 times for
//     k >= 0 or -k times for k < 0 and leaves the terminating bit behind it.
//  4. The top N-1 bits are kept; the next bit is the guard bit and everything
//     below is the sticky bit. Round to nearest, ties to even, acts on this bit
//     string, so the cut can fall inside the exponent as well as the fraction.
//  5. Scales beyond the largest regime give maxpos; nonzero values below minpos
//     give minpos (never zero, never NaR). Negative results are two's-complemented.
// Combinational. The rounding and saturation rules follow the usual posit
// convention and are this design's choice; the source names this block
// without describing it.
module posit_normalizer
  import posit_pkg::*;
#(
  parameter int N     = 16,
  parameter int ES    = 2,
  parameter int INT_W = 32,
  parameter int FW    = bundle_fw(N, ES, INT_W),
  parameter int SW    = scale_w(N, ES, INT_W)
) (
  input  logic                 nar_i,
  input  logic                 zero_i,
  input  logic                 sign_i,
  input  logic signed [SW-1:0] scale_i,
  input  logic [FW-1:0]        frac_i,
  output logic [N-1:0]         posit_o,
  output logic                 round_up_o,  // observation: rounding incremented the pattern
  output logic                 clamp_o      // observation: saturated to maxpos or minpos
);
  localparam int CW = $clog2(FW + 1);
  localparam int TW = 2 + ES + FW - 1;     // {regime seed, exponent, fraction}
  localparam int WW = TW + N;              // room for the regime shift
  localparam int KW = $clog2(N + 1) + 1;

  logic [CW-1:0] lz;
  logic [FW-1:0] nfrac;
  logic signed [SW-1:0] s, k;
  logic [TW-1:0] seed;
  logic [WW-1:0] wide;
  logic [KW-1:0] shamt;
  logic [N-2:0] mag, mag_r;
  logic guard, sticky, rnd;
  logic big, tiny;

  posit_lzc #(.W(FW)) u_lzc (.in_i(frac_i), .count_o(lz));

  always_comb begin
    nfrac = frac_i << lz;
    s     = scale_i + SW'(1) - SW'(lz);
    k     = s >>> ES;
    big   = (k >= SW'(N - 2));
    tiny  = (k < -SW'(N - 2));
    shamt = (k >= 0) ? KW'(k) : KW'(-k - SW'(1));
  end

  if (ES > 0) begin : g_exp
    assign seed = {(k >= 0) ? 2'b10 : 2'b01, s[ES-1:0], nfrac[FW-2:0]};
  end else begin : g_noexp
    assign seed = {(k >= 0) ? 2'b10 : 2'b01, nfrac[FW-2:0]};
  end

  always_comb begin
    wide   = WW'($signed({seed, {N{1'b0}}}) >>> shamt);
    mag    = wide[WW-1 -: N-1];
    guard  = wide[WW-N];
    sticky = |wide[WW-N-1:0];
    rnd    = guard & (sticky | mag[0]);
    mag_r  = mag + (N-1)'(rnd);
    if (big) mag_r = {(N - 1){1'b1}};
    if (tiny) mag_r = (N-1)'(1);
  end

  // the hidden bit, always one after normalization, is not encoded
  logic unused_bits;
  assign unused_bits = nfrac[FW-1];

  always_comb begin
    round_up_o = 1'b0;
    clamp_o    = 1'b0;
    if (nar_i) begin
      posit_o = {1'b1, {(N - 1){1'b0}}};
    end else if (zero_i || frac_i == '0) begin
      posit_o = '0;
    end else begin
      posit_o    = sign_i ? -{1'b0, mag_r} : {1'b0, mag_r};
      round_up_o = rnd & ~big & ~tiny;
      clamp_o    = big | tiny;
    end
  end
endmodule

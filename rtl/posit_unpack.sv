// posit_unpack: splits an (N,ES) posit into sign, scale and fraction.
//
// Negative posits are two's-complemented first. The regime is the run of
// identical bits after the sign: a run of m ones means k = m-1, a run of m zeros
// means k = -m. The ES bits after the regime's terminating bit are the exponent
// e (bits cut off by a long regime count as zero) and what follows is the
// fraction, left-aligned in FB = N-3-ES bits. The value is
// (-1)^sign * 2^scale * 1.frac with scale = k*2^ES + e. Zero (all zeros) and
// NaR (one followed by zeros) are flagged. Combinational. This decoding method
// is this design's; the source names the units that use it but not their insides.
module posit_unpack #(
  parameter int N  = 16,
  parameter int ES = 2,
  parameter int SW = 12,
  parameter int FB = N - 3 - ES
) (
  input  logic [N-1:0]         posit_i,
  output logic                 nar_o,
  output logic                 zero_o,
  output logic                 sign_o,
  output logic signed [SW-1:0] scale_o,
  output logic [FB-1:0]        frac_o
);
  localparam int RW = N - 1;               // regime+exponent+fraction field
  localparam int CW = $clog2(RW + 1);
  localparam int TW = RW + ES + FB;        // field padded for the shift

  logic [N-1:0]  mag;
  logic [RW-1:0] rem, run_src;
  logic [CW-1:0] run;
  logic [TW-1:0] tail;
  logic signed [SW-1:0] k;

  assign nar_o  = posit_i[N-1] & ~|posit_i[N-2:0];
  assign zero_o = ~|posit_i;
  assign sign_o = posit_i[N-1];
  assign mag    = posit_i[N-1] ? -posit_i : posit_i;
  assign rem    = mag[RW-1:0];
  // make the regime run a run of zeros so that a leading-zero count measures it
  assign run_src = rem[RW-1] ? ~rem : rem;

  posit_lzc #(.W(RW)) u_run (.in_i(run_src), .count_o(run));

  always_comb begin
    k = rem[RW-1] ? SW'(run) - SW'(1) : -SW'(run);
    // drop the regime and its terminating bit; what is left starts with the exponent
    tail = {rem, {(ES + FB){1'b0}}} << ({1'b0, run} + (CW + 1)'(1));
  end

  if (ES > 0) begin : g_exp
    assign scale_o = (k <<< ES) + SW'(tail[TW-1 -: ES]);
  end else begin : g_noexp
    assign scale_o = k;
  end
  assign frac_o = tail[TW-1-ES -: FB];

  // the magnitude's top bit is always 0 and the bits below the fraction are
  // the zeros shifted in
  logic unused_bits;
  assign unused_bits = ^{mag[N-1], tail[TW-ES-FB-1:0]};

endmodule

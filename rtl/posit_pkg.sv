// posit_pkg: types and width rules shared by the posit arithmetic unit (PAU).
//
// The PAU works on (N,ES) posits: a sign bit, a run-length coded regime, up to ES
// exponent bits and the remaining fraction bits. Every arithmetic unit hands an
// unrounded result to the shared normalizer as a bundle of five signals:
//   nar, zero        special values (Not-a-Real, zero)
//   sign             sign of the result
//   scale            signed power of two, SW bits (regime*2^ES + exponent)
//   frac             FW-bit magnitude with two integer bits: value =
//                    frac * 2^(scale - (FW-2)); bit 0 may hold a sticky bit
// The functions below size those signals from N, ES and the integer width so
// that multiplication is exact and addition keeps enough guard bits for correct
// round-to-nearest-even. The operation codes and the decoder's control word are
// this design's own encoding; the source only names the operations.
package posit_pkg;

  // Operation code presented on the PAU's Operation input.
  typedef enum logic [2:0] {
    OP_ADD = 3'd0,  // posit A + posit B
    OP_SUB = 3'd1,  // posit A - posit B
    OP_MUL = 3'd2,  // posit A * posit B
    OP_I2P = 3'd3,  // signed integer A -> posit
    OP_P2I = 3'd4   // posit A -> signed integer
  } pau_op_e;

  // Which arithmetic unit the DEMUX feeds and the MUX listens to.
  typedef enum logic [1:0] {
    UNIT_NONE = 2'd0,
    UNIT_CONV = 2'd1,
    UNIT_MUL  = 2'd2,
    UNIT_ADD  = 2'd3
  } pau_unit_e;

  // Control word from the operation decoder (the figure's control path).
  typedef struct packed {
    pau_unit_e unit;        // DEMUX and MUX select
    logic      sub;         // ADD/SUB: subtract B
    logic      to_int;      // I2P/P2I: 1 = posit to integer
    logic      int_result;  // output MUX: 1 = signed integer, 0 = posit
    logic      illegal;     // unknown operation code, result forced to 0
  } pau_ctrl_t;

  // Largest number of fraction bits an (n,es) posit can carry (shortest regime is 2 bits).
  function automatic int frac_bits(input int n, input int es);
    return n - 3 - es;
  endfunction

  // Width of the unrounded fraction bundle: room for an exact significand product
  // plus guard bits, or for a whole integer magnitude, plus two spare bits.
  function automatic int bundle_fw(input int n, input int es, input int intw);
    int m;
    m = 2 * frac_bits(n, es) + 4;
    if (intw > m) m = intw;
    return m + 2;
  endfunction

  // Width of the signed scale: covers the sum of two extreme scales and the
  // adjustment made while normalizing, with margin.
  function automatic int scale_w(input int n, input int es, input int intw);
    int bound;
    bound = 2 * (n - 1) * (2 ** es) + 2 * bundle_fw(n, es, intw) + intw;
    return $clog2(bound) + 2;
  endfunction

endpackage

// posit_core: the posit arithmetic unit (PAU) for the execute stage of a
// 32-bit RISC-V core.
//
// Computes, on (N,ES) posits (default (16,2)): A+B, A-B, A*B, int2pos(A) and
// pos2int(A), chosen by op_i (posit_pkg::pau_op_e). The structure follows the
// source's block diagram of its posit core:
//   DECODER (pau_op_decoder) -> control word for every other block
//   DEMUX   (pau_operand_demux) -> operands to the one active unit
//   I2P/P2I (int_posit_converter), MULTIPLIER (posit_multiplier),
//   ADD/SUB (posit_adder) -> each emits an unrounded sign/exp/frac bundle
//   MUX     (pau_unit_mux) -> bundle of the active unit
//   NORMALIZATION (posit_normalizer) -> one shared rounding/encoding stage
//   MUX     (pau_result_mux) -> posit, or pos2int's signed integer, to RESULT
// Interface: operands and result are INT_W-bit register values. Posit operands
// are read from the low N bits; posit results are sign-extended to INT_W bits.
// Timing: fully combinational, no clock, like the source's adder and
// multiplier, so the result is valid in the same cycle as the operands. The
// ports are those that the core's execute stage would drive and read; the
// surrounding RISC-V core is not part of this design.
// round_up_o and clamp_o only report what the normalizer did (rounded up,
// saturated to maxpos/minpos) and are meant for observation and test.
module posit_core
  import posit_pkg::*;
#(
  parameter int N     = 16,
  parameter int ES    = 2,
  parameter int INT_W = 32
) (
  input  logic [2:0]       op_i,
  input  logic [INT_W-1:0] operand_a_i,
  input  logic [INT_W-1:0] operand_b_i,
  output logic [INT_W-1:0] result_o,
  output logic             illegal_op_o,
  output logic             round_up_o,
  output logic             clamp_o
);
  localparam int FW = bundle_fw(N, ES, INT_W);
  localparam int SW = scale_w(N, ES, INT_W);

  initial begin
    assert (N >= ES + 4 && N <= INT_W)
      else $fatal(1, "posit_core: need ES+4 <= N <= INT_W");
  end

  pau_ctrl_t ctrl;
  pau_op_decoder u_dec (.op_i(op_i), .ctrl_o(ctrl));

  logic [INT_W-1:0] cv_a;
  logic [N-1:0] mul_a, mul_b, add_a, add_b;
  pau_operand_demux #(.N(N), .INT_W(INT_W)) u_demux (
    .sel_i(ctrl.unit), .opa_i(operand_a_i), .opb_i(operand_b_i),
    .cv_a_o(cv_a), .mul_a_o(mul_a), .mul_b_o(mul_b), .add_a_o(add_a), .add_b_o(add_b));

  logic cv_nar, cv_zero, cv_sign, mul_nar, mul_zero, mul_sign, add_nar, add_zero, add_sign;
  logic signed [SW-1:0] cv_scale, mul_scale, add_scale;
  logic [FW-1:0] cv_frac, mul_frac, add_frac;
  logic [INT_W-1:0] cv_int;

  int_posit_converter #(.N(N), .ES(ES), .INT_W(INT_W)) u_conv (
    .a_i(cv_a), .to_int_i(ctrl.to_int),
    .nar_o(cv_nar), .zero_o(cv_zero), .sign_o(cv_sign), .scale_o(cv_scale), .frac_o(cv_frac),
    .int_o(cv_int));

  posit_multiplier #(.N(N), .ES(ES), .INT_W(INT_W)) u_mul (
    .a_i(mul_a), .b_i(mul_b),
    .nar_o(mul_nar), .zero_o(mul_zero), .sign_o(mul_sign), .scale_o(mul_scale), .frac_o(mul_frac));

  posit_adder #(.N(N), .ES(ES), .INT_W(INT_W)) u_add (
    .a_i(add_a), .b_i(add_b), .sub_i(ctrl.sub),
    .nar_o(add_nar), .zero_o(add_zero), .sign_o(add_sign), .scale_o(add_scale), .frac_o(add_frac));

  logic n_nar, n_zero, n_sign;
  logic signed [SW-1:0] n_scale;
  logic [FW-1:0] n_frac;
  pau_unit_mux #(.N(N), .ES(ES), .INT_W(INT_W)) u_mux (
    .sel_i(ctrl.unit),
    .cv_nar_i(cv_nar), .mul_nar_i(mul_nar), .add_nar_i(add_nar),
    .cv_zero_i(cv_zero), .mul_zero_i(mul_zero), .add_zero_i(add_zero),
    .cv_sign_i(cv_sign), .mul_sign_i(mul_sign), .add_sign_i(add_sign),
    .cv_scale_i(cv_scale), .mul_scale_i(mul_scale), .add_scale_i(add_scale),
    .cv_frac_i(cv_frac), .mul_frac_i(mul_frac), .add_frac_i(add_frac),
    .nar_o(n_nar), .zero_o(n_zero), .sign_o(n_sign), .scale_o(n_scale), .frac_o(n_frac));

  logic [N-1:0] posit_res;
  logic n_round_up, n_clamp;
  posit_normalizer #(.N(N), .ES(ES), .INT_W(INT_W)) u_norm (
    .nar_i(n_nar), .zero_i(n_zero), .sign_i(n_sign), .scale_i(n_scale), .frac_i(n_frac),
    .posit_o(posit_res), .round_up_o(n_round_up), .clamp_o(n_clamp));

  pau_result_mux #(.N(N), .INT_W(INT_W)) u_rmux (
    .int_result_i(ctrl.int_result), .illegal_i(ctrl.illegal),
    .posit_i(posit_res), .int_i(cv_int), .result_o(result_o));

  assign illegal_op_o = ctrl.illegal;
  assign round_up_o   = n_round_up & ~ctrl.int_result & ~ctrl.illegal;
  assign clamp_o      = n_clamp & ~ctrl.int_result & ~ctrl.illegal;
endmodule

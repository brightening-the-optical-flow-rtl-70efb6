// pau_unit_mux: the PAU's MUX between the arithmetic units and NORMALIZATION.
//
// Passes the sign/scale/fraction bundle (with its zero and NaR flags) of the
// unit the decoder selected to the shared normalizer; with no unit selected it
// outputs a zero bundle. Combinational. The source's diagram shows this MUX
// with sign, exp and frac inputs from I2P/P2I, MULTIPLIER and ADD/SUB; carrying
// the zero and NaR flags with them is this design's choice.
module pau_unit_mux
  import posit_pkg::*;
#(
  parameter int N     = 16,
  parameter int ES    = 2,
  parameter int INT_W = 32,
  parameter int FW    = bundle_fw(N, ES, INT_W),
  parameter int SW    = scale_w(N, ES, INT_W)
) (
  input  pau_unit_e            sel_i,
  input  logic                 cv_nar_i,  mul_nar_i,  add_nar_i,
  input  logic                 cv_zero_i, mul_zero_i, add_zero_i,
  input  logic                 cv_sign_i, mul_sign_i, add_sign_i,
  input  logic signed [SW-1:0] cv_scale_i, mul_scale_i, add_scale_i,
  input  logic [FW-1:0]        cv_frac_i, mul_frac_i, add_frac_i,
  output logic                 nar_o,
  output logic                 zero_o,
  output logic                 sign_o,
  output logic signed [SW-1:0] scale_o,
  output logic [FW-1:0]        frac_o
);
  always_comb begin
    nar_o   = 1'b0;
    zero_o  = 1'b1;
    sign_o  = 1'b0;
    scale_o = '0;
    frac_o  = '0;
    unique case (sel_i)
      UNIT_CONV: begin nar_o = cv_nar_i;  zero_o = cv_zero_i;  sign_o = cv_sign_i;  scale_o = cv_scale_i;  frac_o = cv_frac_i;  end
      UNIT_MUL:  begin nar_o = mul_nar_i; zero_o = mul_zero_i; sign_o = mul_sign_i; scale_o = mul_scale_i; frac_o = mul_frac_i; end
      UNIT_ADD:  begin nar_o = add_nar_i; zero_o = add_zero_i; sign_o = add_sign_i; scale_o = add_scale_i; frac_o = add_frac_i; end
      default:   ;
    endcase
  end
endmodule

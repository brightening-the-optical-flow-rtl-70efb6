// pau_operand_demux: the PAU's DEMUX.
//
// Routes Operand A and Operand B to the one arithmetic unit the decoder
// selects and drives zero into the inputs of the others, so that idle units do
// not toggle (operand isolation). The multiplier and adder take the low N bits
// of both operands as posits; the converter takes all INT_W bits of Operand A
// only, since int2pos and pos2int are unary. Combinational. The source's
// diagram names the DEMUX and its OpA/OpB outputs; the zeroing of idle outputs
// is this design's choice.
module pau_operand_demux
  import posit_pkg::*;
#(
  parameter int N     = 16,
  parameter int INT_W = 32
) (
  input  pau_unit_e        sel_i,
  input  logic [INT_W-1:0] opa_i,
  input  logic [INT_W-1:0] opb_i,
  output logic [INT_W-1:0] cv_a_o,
  output logic [N-1:0]     mul_a_o,
  output logic [N-1:0]     mul_b_o,
  output logic [N-1:0]     add_a_o,
  output logic [N-1:0]     add_b_o
);
  always_comb begin
    cv_a_o  = '0;
    mul_a_o = '0;
    mul_b_o = '0;
    add_a_o = '0;
    add_b_o = '0;
    unique case (sel_i)
      UNIT_CONV: cv_a_o = opa_i;
      UNIT_MUL:  begin mul_a_o = opa_i[N-1:0]; mul_b_o = opb_i[N-1:0]; end
      UNIT_ADD:  begin add_a_o = opa_i[N-1:0]; add_b_o = opb_i[N-1:0]; end
      default:   ;
    endcase
  end

  logic unused;
  assign unused = ^opb_i;  // upper bits of Operand B carry no posit data
endmodule

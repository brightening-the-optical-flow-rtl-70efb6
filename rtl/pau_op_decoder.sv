// pau_op_decoder: the PAU's DECODER, the source of its control path.
//
// Turns the operation code (posit_pkg::pau_op_e) into the control word that
// steers the other blocks: which unit the DEMUX feeds and the MUX selects,
// whether ADD/SUB subtracts, which direction I2P/P2I converts, and whether the
// output MUX passes the normalized posit or the signed integer. An unknown code
// selects no unit and flags illegal_o, which forces the result to zero.
// Combinational. The source's diagram shows the decoder and its control
// arrows; the codes and the control word are this design's.
module pau_op_decoder
  import posit_pkg::*;
(
  input  logic [2:0] op_i,
  output pau_ctrl_t  ctrl_o
);
  always_comb begin
    ctrl_o = '{unit: UNIT_NONE, sub: 1'b0, to_int: 1'b0, int_result: 1'b0, illegal: 1'b0};
    case (op_i)
      OP_ADD:  ctrl_o.unit = UNIT_ADD;
      OP_SUB:  begin ctrl_o.unit = UNIT_ADD; ctrl_o.sub = 1'b1; end
      OP_MUL:  ctrl_o.unit = UNIT_MUL;
      OP_I2P:  ctrl_o.unit = UNIT_CONV;
      OP_P2I:  begin ctrl_o.unit = UNIT_CONV; ctrl_o.to_int = 1'b1; ctrl_o.int_result = 1'b1; end
      default: ctrl_o.illegal = 1'b1;
    endcase
  end
endmodule

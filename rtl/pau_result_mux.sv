// pau_result_mux: the PAU's output MUX in front of RESULT.
//
// Selects either the normalized N-bit posit, sign-extended to the INT_W-bit
// register width, or the signed integer from pos2int. An illegal operation
// gives zero. Sign extension keeps posits ordered like two's-complement
// integers in the register file; that, and the zero on illegal codes, are
// this design's choices. Combinational.
module pau_result_mux #(
  parameter int N     = 16,
  parameter int INT_W = 32
) (
  input  logic             int_result_i,
  input  logic             illegal_i,
  input  logic [N-1:0]     posit_i,
  input  logic [INT_W-1:0] int_i,
  output logic [INT_W-1:0] result_o
);
  always_comb begin
    if (illegal_i)         result_o = '0;
    else if (int_result_i) result_o = int_i;
    else                   result_o = INT_W'($signed(posit_i));
  end
endmodule

// tb_posit_core_exhaustive8: exhaustive test of the posit arithmetic unit for
// the 8-bit configurations (8,0) and (8,2).
//
// Two instances of the unit, one per configuration, see every pair of 8-bit
// operands for add, subtract and multiply (3 x 65536 cases each), every 8-bit
// posit for pos2int and every integer from -1000 to 1000 for int2pos. Expected
// values come from posit_ref_pkg. (8,0) exercises the build without exponent
// bits. Results are checked one clock after the operands are applied (the
// unit is combinational).
module tb_posit_core_exhaustive8;
  import posit_ref_pkg::*;

  localparam int INT_W = 32;
  localparam int WATCHDOG_CYCLES = 300000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [2:0]       op;
  logic [INT_W-1:0] a, b, res0, res2;
  logic             ill0, ill2, ru0, ru2, cl0, cl2;

  posit_core #(.N(8), .ES(0), .INT_W(INT_W)) dut0 (
    .op_i(op), .operand_a_i(a), .operand_b_i(b), .result_o(res0),
    .illegal_op_o(ill0), .round_up_o(ru0), .clamp_o(cl0));
  posit_core #(.N(8), .ES(2), .INT_W(INT_W)) dut2 (
    .op_i(op), .operand_a_i(a), .operand_b_i(b), .result_o(res2),
    .illegal_op_o(ill2), .round_up_o(ru2), .clamp_o(cl2));

  int checks = 0, failures = 0;

  task automatic apply(input int code, input logic [INT_W-1:0] xa, input logic [INT_W-1:0] xb);
    longint unsigned e0, e2;
    op = 3'(code);
    a  = xa;
    b  = xb;
    @(posedge clk);
    #1;
    e0 = expected_result(code, 64'(xa), 64'(xb), 8, 0, INT_W);
    e2 = expected_result(code, 64'(xa), 64'(xb), 8, 2, INT_W);
    checks += 2;
    if (res0 !== INT_W'(e0)) begin
      failures++;
      if (failures < 20) $display("FAIL (8,0) op=%0d a=%h b=%h got=%h exp=%h", code, xa, xb, res0, INT_W'(e0));
    end
    if (res2 !== INT_W'(e2)) begin
      failures++;
      if (failures < 20) $display("FAIL (8,2) op=%0d a=%h b=%h got=%h exp=%h", code, xa, xb, res2, INT_W'(e2));
    end
  endtask

  initial begin
    repeat (WATCHDOG_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned ru_seen = 0, cl_seen = 0;
    for (int code = 0; code < 3; code++)
      for (int i = 0; i < 256; i++)
        for (int j = 0; j < 256; j++) begin
          apply(code, INT_W'(i), INT_W'(j));
          ru_seen += 32'(ru0) + 32'(ru2);
          cl_seen += 32'(cl0) + 32'(cl2);
        end
    for (int i = 0; i < 256; i++) apply(4, INT_W'(i), 0);
    for (int i = -1000; i <= 1000; i++) apply(3, INT_W'(i), 0);
    $display("round-ups=%0d clamps=%0d", ru_seen, cl_seen);
    if (ru_seen == 0 || cl_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

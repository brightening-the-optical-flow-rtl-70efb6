// tb_posit_core_configs: checks the posit arithmetic unit in two further
// configurations that the source reports having verified: (10,2) exhaustively
// (every operand pair for add, subtract and multiply, every posit for
// pos2int) and (16,1) with 60000 random operand pairs per operation plus
// int2pos and pos2int. Expected values come from posit_ref_pkg. Results are
// checked one clock after the operands are applied (the unit is combinational).
module tb_posit_core_configs;
  import posit_ref_pkg::*;

  localparam int INT_W = 32;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [2:0]       op;
  logic [INT_W-1:0] a, b, res10, res16;
  logic             unused_i10, unused_i16, unused_r10, unused_r16, unused_c10, unused_c16;

  posit_core #(.N(10), .ES(2), .INT_W(INT_W)) dut10 (
    .op_i(op), .operand_a_i(a), .operand_b_i(b), .result_o(res10),
    .illegal_op_o(unused_i10), .round_up_o(unused_r10), .clamp_o(unused_c10));
  posit_core #(.N(16), .ES(1), .INT_W(INT_W)) dut16 (
    .op_i(op), .operand_a_i(a), .operand_b_i(b), .result_o(res16),
    .illegal_op_o(unused_i16), .round_up_o(unused_r16), .clamp_o(unused_c16));

  int checks = 0, failures = 0;

  task automatic apply(input int code, input logic [INT_W-1:0] xa, input logic [INT_W-1:0] xb,
                       input bit chk10, input bit chk16);
    longint unsigned e;
    op = 3'(code);
    a  = xa;
    b  = xb;
    @(posedge clk);
    #1;
    if (chk10) begin
      e = expected_result(code, 64'(xa), 64'(xb), 10, 2, INT_W);
      checks++;
      if (res10 !== INT_W'(e)) begin
        failures++;
        if (failures < 20) $display("FAIL (10,2) op=%0d a=%h b=%h got=%h exp=%h", code, xa, xb, res10, INT_W'(e));
      end
    end
    if (chk16) begin
      e = expected_result(code, 64'(xa), 64'(xb), 16, 1, INT_W);
      checks++;
      if (res16 !== INT_W'(e)) begin
        failures++;
        if (failures < 20) $display("FAIL (16,1) op=%0d a=%h b=%h got=%h exp=%h", code, xa, xb, res16, INT_W'(e));
      end
    end
  endtask

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int code = 0; code < 3; code++)
      for (int i = 0; i < 1024; i++)
        for (int j = 0; j < 1024; j++) apply(code, INT_W'(i), INT_W'(j), 1'b1, 1'b0);
    for (int i = 0; i < 1024; i++) apply(4, INT_W'(i), 0, 1'b1, 1'b0);
    for (int i = 0; i < 60000; i++) begin
      apply(0, INT_W'($signed(16'($urandom))), INT_W'($signed(16'($urandom))), 1'b0, 1'b1);
      apply(1, INT_W'($signed(16'($urandom))), INT_W'($signed(16'($urandom))), 1'b0, 1'b1);
      apply(2, INT_W'($signed(16'($urandom))), INT_W'($signed(16'($urandom))), 1'b0, 1'b1);
      apply(4, INT_W'($signed(16'($urandom))), 0, 1'b0, 1'b1);
      apply(3, $urandom >> $urandom_range(31), 0, 1'b1, 1'b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

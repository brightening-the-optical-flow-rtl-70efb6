// tb_pau_operand_demux: drives random operands with each unit select and
// checks that only the selected unit receives them and all other outputs are
// zero. One case per clock.
module tb_pau_operand_demux;
  import posit_pkg::*;
  localparam int N = 16, INT_W = 32;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  pau_unit_e sel;
  logic [INT_W-1:0] opa, opb, cv_a;
  logic [N-1:0] mul_a, mul_b, add_a, add_b;
  int checks = 0, failures = 0;

  pau_operand_demux #(.N(N), .INT_W(INT_W)) dut (
    .sel_i(sel), .opa_i(opa), .opb_i(opb), .cv_a_o(cv_a),
    .mul_a_o(mul_a), .mul_b_o(mul_b), .add_a_o(add_a), .add_b_o(add_b));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s sel=%0d", what, sel);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      sel = pau_unit_e'(i % 4);
      opa = $urandom;
      opb = $urandom;
      @(posedge clk);
      #1;
      check(cv_a  === ((sel == UNIT_CONV) ? opa : '0), "conv");
      check(mul_a === ((sel == UNIT_MUL) ? opa[N-1:0] : '0), "mul a");
      check(mul_b === ((sel == UNIT_MUL) ? opb[N-1:0] : '0), "mul b");
      check(add_a === ((sel == UNIT_ADD) ? opa[N-1:0] : '0), "add a");
      check(add_b === ((sel == UNIT_ADD) ? opb[N-1:0] : '0), "add b");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

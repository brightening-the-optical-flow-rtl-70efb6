// tb_posit_core_es2_sweep: exhaustive test of the posit arithmetic unit for
// (7,2), (9,2) and (11,2), small configurations the source reports having
// verified exhaustively ((8,2) and (10,2) are covered by other testbenches;
// (12,2), 50 million cases, is left out for run time). Three instances see every operand pair of their width for
// add, subtract and multiply, and every posit for pos2int. Expected values
// come from posit_ref_pkg. One operand pair per clock; the smaller
// configurations run on the low bits of the same stimulus and are checked
// only while their pattern space is being swept.
module tb_posit_core_es2_sweep;
  import posit_ref_pkg::*;

  localparam int INT_W = 32;
  localparam int NC = 3;
  localparam int NS [NC] = '{7, 9, 11};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [2:0]       op;
  logic [INT_W-1:0] a, b;
  logic [INT_W-1:0] res [NC];
  logic             ill [NC];
  logic             ru [NC];
  logic             cl [NC];

  for (genvar c = 0; c < NC; c++) begin : g_dut
    posit_core #(.N(NS[c]), .ES(2), .INT_W(INT_W)) dut (
      .op_i(op), .operand_a_i(a), .operand_b_i(b), .result_o(res[c]),
      .illegal_op_o(ill[c]), .round_up_o(ru[c]), .clamp_o(cl[c]));
  end

  int checks = 0, failures = 0;

  task automatic apply(input int c, input int code, input logic [INT_W-1:0] xa, input logic [INT_W-1:0] xb);
    longint unsigned e;
    op = 3'(code);
    a  = xa;
    b  = xb;
    @(posedge clk);
    #1;
    e = expected_result(code, 64'(xa), 64'(xb), NS[c], 2, INT_W);
    checks++;
    if (res[c] !== INT_W'(e)) begin
      failures++;
      if (failures < 20)
        $display("FAIL (%0d,2) op=%0d a=%h b=%h got=%h exp=%h", NS[c], code, xa, xb, res[c], INT_W'(e));
    end
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NC; c++) begin
      for (int code = 0; code < 3; code++)
        for (int i = 0; i < (1 << NS[c]); i++)
          for (int j = 0; j < (1 << NS[c]); j++) apply(c, code, INT_W'(i), INT_W'(j));
      for (int i = 0; i < (1 << NS[c]); i++) apply(c, 4, INT_W'(i), 0);
      $display("(%0d,2) done, checks so far %0d, failures %0d", NS[c], checks, failures);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pau_op_decoder: checks the operation decoder's control word for all
// eight operation codes against a hand-written table. One code per clock.
module tb_pau_op_decoder;
  import posit_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [2:0] op;
  pau_ctrl_t ctrl;
  int checks = 0, failures = 0;

  pau_op_decoder dut (.op_i(op), .ctrl_o(ctrl));

  // expected {unit, sub, to_int, int_result, illegal} per code
  logic [5:0] table_exp [8] = '{
    {2'd3, 1'b0, 1'b0, 1'b0, 1'b0},   // add -> ADD/SUB
    {2'd3, 1'b1, 1'b0, 1'b0, 1'b0},   // sub -> ADD/SUB, subtract
    {2'd2, 1'b0, 1'b0, 1'b0, 1'b0},   // mul -> MULTIPLIER
    {2'd1, 1'b0, 1'b0, 1'b0, 1'b0},   // int2pos -> I2P/P2I, posit result
    {2'd1, 1'b0, 1'b1, 1'b1, 1'b0},   // pos2int -> I2P/P2I, integer result
    {2'd0, 1'b0, 1'b0, 1'b0, 1'b1},
    {2'd0, 1'b0, 1'b0, 1'b0, 1'b1},
    {2'd0, 1'b0, 1'b0, 1'b0, 1'b1}};

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 2; r++)
      for (int i = 0; i < 8; i++) begin
        op = 3'(i);
        @(posedge clk);
        #1;
        checks++;
        if (6'(ctrl) !== table_exp[i]) begin
          failures++;
          $display("FAIL op=%0d got=%b exp=%b", i, 6'(ctrl), table_exp[i]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

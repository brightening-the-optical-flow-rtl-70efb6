// tb_pau_result_mux: checks the output MUX: the posit is sign-extended to the
// register width, pos2int's integer passes unchanged, and an illegal
// operation gives zero. One case per clock.
module tb_pau_result_mux;
  localparam int N = 16, INT_W = 32;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic int_sel, illegal;
  logic [N-1:0] posit;
  logic [INT_W-1:0] ival, res, exp_res;
  int checks = 0, failures = 0;

  pau_result_mux #(.N(N), .INT_W(INT_W)) dut (
    .int_result_i(int_sel), .illegal_i(illegal), .posit_i(posit), .int_i(ival), .result_o(res));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int_sel = 1'(i);
      illegal = (i % 7) == 3;
      posit   = N'($urandom);
      ival    = $urandom;
      if (illegal) exp_res = 0;
      else if (int_sel) exp_res = ival;
      else exp_res = posit[N-1] ? {16'hFFFF, posit} : {16'h0000, posit};
      @(posedge clk);
      #1;
      checks++;
      if (res !== exp_res) begin
        failures++;
        if (failures < 10) $display("FAIL got=%h exp=%h", res, exp_res);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

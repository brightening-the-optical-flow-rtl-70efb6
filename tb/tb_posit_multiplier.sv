// tb_posit_multiplier: checks the MULTIPLIER unit's unrounded output bundle.
// For random (16,2) operand pairs, plus zero, NaR, maxpos and minpos, the
// bundle's value frac * 2^(scale-(FW-2)) with its sign must equal the exact
// product of the two decoded posits (posit_ref_pkg), and the zero/NaR flags
// must match. One case per clock.
module tb_posit_multiplier;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  localparam int N = 16, ES = 2, INT_W = 32;
  localparam int FW = bundle_fw(N, ES, INT_W);
  localparam int SW = scale_w(N, ES, INT_W);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [N-1:0] a, b;
  logic nar, zero, sign;
  logic signed [SW-1:0] scale;
  logic [FW-1:0] frac;
  int checks = 0, failures = 0;

  posit_multiplier #(.N(N), .ES(ES), .INT_W(INT_W)) dut (
    .a_i(a), .b_i(b), .nar_o(nar), .zero_o(zero), .sign_o(sign), .scale_o(scale), .frac_o(frac));

  task automatic run(input logic [N-1:0] xa, input logic [N-1:0] xb);
    logic enar, ezero;
    real v, got;
    a = xa;
    b = xb;
    @(posedge clk);
    #1;
    enar  = (xa == 16'h8000) || (xb == 16'h8000);
    ezero = !enar && (xa == 0 || xb == 0);
    checks++;
    if (nar !== enar || zero !== ezero) begin
      failures++;
      if (failures < 10) $display("FAIL flags a=%h b=%h", xa, xb);
    end else if (!enar && !ezero) begin
      v   = to_real(64'(xa), N, ES) * to_real(64'(xb), N, ES);
      got = real'(frac) * (2.0 ** real'(int'(scale) - (FW - 2)));
      if (sign) got = -got;
      checks++;
      if (got != v) begin
        failures++;
        if (failures < 10) $display("FAIL a=%h b=%h got=%g exp=%g", xa, xb, got, v);
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(16'h4000, 16'h4000);
    run(16'h7FFF, 16'h7FFF);
    run(16'h0001, 16'h0001);
    run(16'h8000, 16'h4000);
    run(16'h0000, 16'h4000);
    run(16'h0000, 16'h8000);
    run(16'hC000, 16'h5234);
    for (int i = 0; i < 40000; i++) run(N'($urandom), N'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_posit_adder: checks the ADD/SUB unit's unrounded output bundle.
// For random (16,2) operand pairs, both add and subtract, plus zero, NaR,
// equal operands and widely separated operands, the bundle's value
// frac * 2^(scale-(FW-2)) must equal the exact sum or difference of the
// decoded posits (posit_ref_pkg) when no bits were shifted out, and lie
// within one unit of the last fraction bit when they were (sticky bit). The
// zero/NaR flags must match. One case per clock.
module tb_posit_adder;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  localparam int N = 16, ES = 2, INT_W = 32;
  localparam int FW = bundle_fw(N, ES, INT_W);
  localparam int SW = scale_w(N, ES, INT_W);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [N-1:0] a, b;
  logic sub;
  logic nar, zero, sign;
  logic signed [SW-1:0] scale;
  logic [FW-1:0] frac;
  int checks = 0, failures = 0;

  posit_adder #(.N(N), .ES(ES), .INT_W(INT_W)) dut (
    .a_i(a), .b_i(b), .sub_i(sub), .nar_o(nar), .zero_o(zero), .sign_o(sign), .scale_o(scale), .frac_o(frac));

  task automatic run(input logic [N-1:0] xa, input logic [N-1:0] xb);
    logic enar, ezero;
    real v, got, lsb;
    a = xa;
    b = xb;
    @(posedge clk);
    #1;
    enar  = (xa == 16'h8000) || (xb == 16'h8000);
    v     = sub ? to_real(64'(xa), N, ES) - to_real(64'(xb), N, ES)
              : to_real(64'(xa), N, ES) + to_real(64'(xb), N, ES);
    ezero = !enar && v == 0.0;
    checks++;
    if (nar !== enar || zero !== ezero) begin
      failures++;
      if (failures < 10) $display("FAIL flags a=%h b=%h", xa, xb);
    end else if (!enar && !ezero) begin
      got = real'(frac) * (2.0 ** real'(int'(scale) - (FW - 2)));
      if (sign) got = -got;
      lsb = 2.0 ** real'(int'(scale) - (FW - 2));
      checks++;
      if ((got - v > lsb) || (v - got > lsb) || (frac[0] == 1'b0 && got != v)) begin
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
    sub = 1'b1;
    run(16'h4000, 16'h4000);
    run(16'h4001, 16'h4000);
    run(16'h7FFF, 16'h0001);
    run(16'h0001, 16'h7FFF);
    sub = 1'b0;
    run(16'h4000, 16'h4000);
    run(16'h4000, 16'hC000);
    run(16'h7FFF, 16'h0001);
    run(16'h7FFF, 16'h7FFF);
    run(16'h0001, 16'h0001);
    run(16'h8000, 16'h4000);
    run(16'h0000, 16'h4000);
    run(16'h0000, 16'h8000);
    run(16'hC000, 16'h5234);
    for (int i = 0; i < 40000; i++) begin
      sub = 1'($urandom);
      if (i % 4 == 0) begin
        // nearby magnitudes: exercises cancellation and the carry into bit FW-1
        a = N'($urandom);
        run(a, (i % 8 == 0) ? -(a + N'($urandom_range(3))) : a + N'($urandom_range(40)));
      end else run(N'($urandom), N'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

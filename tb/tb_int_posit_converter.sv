// tb_int_posit_converter: checks the I2P/P2I unit.
// pos2int: every one of the 65536 (16,2) posits is converted and compared
// with the value rounded to the nearest integer, ties to even, saturated to
// 32 bits (posit_ref_pkg); NaR must give 0x80000000.
// int2pos: for corner integers and random ones the unrounded bundle value
// must equal the integer exactly and the zero flag must match.
// One case per clock.
module tb_int_posit_converter;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  localparam int N = 16, ES = 2, INT_W = 32;
  localparam int FW = bundle_fw(N, ES, INT_W);
  localparam int SW = scale_w(N, ES, INT_W);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [INT_W-1:0] a, ires;
  logic to_int, nar, zero, sign;
  logic signed [SW-1:0] scale;
  logic [FW-1:0] frac;
  int checks = 0, failures = 0;

  int_posit_converter #(.N(N), .ES(ES), .INT_W(INT_W)) dut (
    .a_i(a), .to_int_i(to_int), .nar_o(nar), .zero_o(zero), .sign_o(sign), .scale_o(scale),
    .frac_o(frac), .int_o(ires));

  task automatic p2i(input logic [N-1:0] p);
    logic [INT_W-1:0] e;
    a = INT_W'(p);
    to_int = 1'b1;
    @(posedge clk);
    #1;
    if (p == 16'h8000) e = 32'h8000_0000;
    else e = INT_W'(to_int_ref(to_real(64'(p), N, ES), INT_W));
    checks++;
    if (ires !== e) begin
      failures++;
      if (failures < 10) $display("FAIL p2i p=%h got=%h exp=%h", p, ires, e);
    end
  endtask

  task automatic i2p(input logic [INT_W-1:0] x);
    real got;
    a = x;
    to_int = 1'b0;
    @(posedge clk);
    #1;
    got = real'(frac) * (2.0 ** real'(int'(scale) - (FW - 2)));
    if (sign) got = -got;
    checks++;
    if (nar || zero !== (x == 0) || (x != 0 && got != real'($signed(x)))) begin
      failures++;
      if (failures < 10) $display("FAIL i2p x=%h got=%g", x, got);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) p2i(N'(i));
    i2p(0);
    i2p(1);
    i2p(32'hFFFF_FFFF);
    i2p(32'h8000_0000);
    i2p(32'h7FFF_FFFF);
    for (int i = 0; i < 5000; i++) i2p($urandom >> $urandom_range(31));
    for (int i = 0; i < 5000; i++) i2p(-($urandom >> $urandom_range(31)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

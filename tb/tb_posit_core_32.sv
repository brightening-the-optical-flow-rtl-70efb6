// tb_posit_core_32: checks the posit arithmetic unit built for (32,2) and for
// (28,2) posits, the two wide configurations, with 32-bit operands and results.
//
// The double-precision reference in posit_ref_pkg decodes 32-bit posits
// exactly but cannot hold every exact sum or product. So multiply operands
// have their two lowest pattern bits cleared (at most 26 significant bits
// each, a product of at most 52 bits). Add and subtract cases are checked only
// when the double sum is exact, which an error-free two-sum test decides;
// skipped cases are counted. pos2int and int2pos are checked on random
// values. One operation per clock.
module tb_posit_core_32;
  import posit_ref_pkg::*;

  localparam int ES = 2, INT_W = 32;
  localparam int NRAND = 20000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [2:0]       op;
  logic [INT_W-1:0] a, b, res32, res28;
  logic             ill32, ru32, cl32, ill28, ru28, cl28;

  posit_core #(.N(32), .ES(ES), .INT_W(INT_W)) dut32 (
    .op_i(op), .operand_a_i(a), .operand_b_i(b), .result_o(res32),
    .illegal_op_o(ill32), .round_up_o(ru32), .clamp_o(cl32));
  posit_core #(.N(28), .ES(ES), .INT_W(INT_W)) dut28 (
    .op_i(op), .operand_a_i(a), .operand_b_i(b), .result_o(res28),
    .illegal_op_o(ill28), .round_up_o(ru28), .clamp_o(cl28));

  int checks = 0, failures = 0, skipped = 0;

  function automatic bit sum_exact(input real x, input real y);
    real s, bb, err;
    s   = x + y;
    bb  = s - x;
    err = (x - (s - bb)) + (y - bb);
    return err == 0.0;
  endfunction

  task automatic apply(input int n, input int code, input logic [INT_W-1:0] xa, input logic [INT_W-1:0] xb);
    longint unsigned e;
    real va, vb;
    logic [INT_W-1:0] res;
    op = 3'(code);
    a  = xa;
    b  = xb;
    @(posedge clk);
    #1;
    res = (n == 32) ? res32 : res28;
    if (code <= 1 && 64'(xa) != nar_pattern(n) && 64'(xb) != nar_pattern(n)) begin
      va = to_real(64'(xa), n, ES);
      vb = to_real(64'(xb), n, ES);
      if (!sum_exact(va, (code == 1) ? -vb : vb)) begin
        skipped++;
        return;
      end
    end
    e = expected_result(code, 64'(xa), 64'(xb), n, ES, INT_W);
    checks++;
    if (res !== INT_W'(e)) begin
      failures++;
      if (failures < 20) $display("FAIL (%0d,2) op=%0d a=%h b=%h got=%h exp=%h", n, code, xa, xb, res, INT_W'(e));
    end
  endtask

  function automatic logic [INT_W-1:0] rnd_posit();
    // random patterns, and patterns whose scale lies near 1
    if ($urandom_range(1) == 0) return $urandom;
    return {$urandom_range(1) == 1, 3'($urandom_range(4, 3)), 28'($urandom)} ^
           ((($urandom_range(1)) == 1) ? 32'hFFFF_FFFF : 32'h0);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NRAND; i++) begin
      apply(32, 0, rnd_posit(), rnd_posit());
      apply(32, 1, rnd_posit(), rnd_posit());
      apply(32, 2, rnd_posit() & ~32'h3, rnd_posit() & ~32'h3);
      apply(32, 3, $urandom >> $urandom_range(31), 0);
      apply(32, 4, rnd_posit(), 0);
      // (28,2): the same patterns shifted down, sign-extended from bit 27
      apply(28, 0, $signed(rnd_posit()) >>> 4, $signed(rnd_posit()) >>> 4);
      apply(28, 1, $signed(rnd_posit()) >>> 4, $signed(rnd_posit()) >>> 4);
      apply(28, 2, $signed(rnd_posit()) >>> 4, $signed(rnd_posit()) >>> 4);
      apply(28, 4, $signed(rnd_posit()) >>> 4, 0);
    end
    $display("add/sub cases skipped (double sum not exact): %0d", skipped);
    if (skipped > 2 * NRAND) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

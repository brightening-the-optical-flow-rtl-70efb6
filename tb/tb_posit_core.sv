// tb_posit_core: end-to-end test of the posit arithmetic unit at its default
// configuration, (16,2) posits with 32-bit operands and results.
//
// Every operation (add, sub, mul, int2pos, pos2int) is run on directed corner
// cases and on random operands. Expected results come from posit_ref_pkg,
// which decodes posits into reals and rounds by searching the posit patterns,
// independently of the RTL. The design is combinational: each result is
// checked one clock after its operands are applied, i.e. within the same
// cycle (latency 0). The test counts how often each mechanism occurs: each
// operation, NaR propagation, zero operands, exact cancellation, rounding up,
// ties to even, saturation at maxpos and at minpos, pos2int saturation and
// illegal codes. A mechanism that never occurs is counted as a failure.
module tb_posit_core;
  import posit_ref_pkg::*;

  localparam int N      = 16;
  localparam int ES     = 2;
  localparam int INT_W  = 32;
  localparam int NRAND  = 20000;
  localparam int WATCHDOG_CYCLES = 400000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [2:0]       op;
  logic [INT_W-1:0] a, b, res;
  logic             illegal, round_up, clamp;

  posit_core dut (
    .op_i(op), .operand_a_i(a), .operand_b_i(b), .result_o(res),
    .illegal_op_o(illegal), .round_up_o(round_up), .clamp_o(clamp));

  int checks = 0, failures = 0;
  int n_op[8];
  int n_nar = 0, n_zero_in = 0, n_cancel = 0, n_round_up = 0, n_tie = 0;
  int n_clamp_max = 0, n_clamp_min = 0, n_int_sat = 0;

  localparam longint unsigned MAXP = (64'd1 << (N - 1)) - 1;

  function automatic logic [N-1:0] p(input real v);
    return N'(from_real(v, N, ES));
  endfunction

  task automatic apply(input int code, input logic [INT_W-1:0] xa, input logic [INT_W-1:0] xb);
    longint unsigned exp_r;
    real va, vb, v;
    logic [N-1:0] pa, pb;
    op = 3'(code);
    a  = xa;
    b  = xb;
    @(posedge clk);
    #1;
    exp_r = expected_result(code, xa, xb, N, ES, INT_W);
    checks++;
    if (res !== INT_W'(exp_r) || illegal !== (code > 4)) begin
      failures++;
      if (failures < 20)
        $display("FAIL op=%0d a=%h b=%h got=%h exp=%h", code, xa, xb, res, INT_W'(exp_r));
    end
    n_op[code]++;
    pa = xa[N-1:0];
    pb = xb[N-1:0];
    if (code <= 2) begin
      if (pa == {1'b1, {(N-1){1'b0}}} || pb == {1'b1, {(N-1){1'b0}}}) n_nar++;
      else begin
        if (pa == '0 || pb == '0) n_zero_in++;
        va = to_real(pa, N, ES);
        vb = to_real(pb, N, ES);
        v  = (code == 0) ? va + vb : (code == 1) ? va - vb : va * vb;
        if (code != 2 && v == 0.0 && va != 0.0) n_cancel++;
        if (is_tie(v, N, ES)) n_tie++;
        if (v != 0.0 && ((v < 0.0 ? -v : v) > to_real(MAXP, N, ES))) begin
          n_clamp_max++;
          checks++;
          if (!clamp) failures++;
        end
        if (v != 0.0 && ((v < 0.0 ? -v : v) < to_real(1, N, ES))) begin
          n_clamp_min++;
          checks++;
          if (!clamp) failures++;
        end
      end
      if (round_up) n_round_up++;
    end
    if (code == 4 && pa != {1'b1, {(N-1){1'b0}}}) begin
      va = to_real(pa, N, ES);
      if (va >= 2147483647.5 || va < -2147483648.0) n_int_sat++;
    end
  endtask

  function automatic logic [INT_W-1:0] rnd_posit();
    // half fully random patterns, half values near one (the common LuKa range)
    if ($urandom_range(1) == 0) return INT_W'($signed(N'($urandom)));
    return INT_W'($signed(p((real'($urandom_range(20000)) - 10000.0) / 997.0)));
  endfunction

  initial begin
    repeat (WATCHDOG_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [INT_W-1:0] one, two, nar, maxp, minp;
    foreach (n_op[i]) n_op[i] = 0;
    one  = INT_W'($signed(p(1.0)));
    two  = INT_W'($signed(p(2.0)));
    nar  = INT_W'($signed({1'b1, {(N-1){1'b0}}}));
    maxp = INT_W'(MAXP);
    minp = INT_W'(1);
    // directed cases
    apply(0, one, one);                                  // 1+1
    apply(1, one, one);                                  // exact cancellation
    apply(2, two, INT_W'($signed(p(-1.5))));             // 2*-1.5
    apply(0, nar, one);                                  // NaR propagates
    apply(2, 0, nar);
    apply(2, 0, two);                                    // zero operand
    apply(0, 0, two);
    apply(1, two, 0);
    apply(2, maxp, maxp);                                // saturate at maxpos
    apply(2, minp, minp);                                // saturate at minpos
    apply(0, maxp, maxp);
    apply(0, one, INT_W'($signed(p(2.0 ** -12))));       // tie, stays at 1 (even)
    apply(0, INT_W'($signed(p(1.0 + 2.0 ** -11))), INT_W'($signed(p(2.0 ** -12))));  // tie, rounds up
    apply(3, 0, 0);
    apply(3, 32'd12345, 0);
    apply(3, 32'hFFFF_FFFF, 0);
    apply(3, 32'h8000_0000, 0);
    apply(3, 32'h7FFF_FFFF, 0);
    apply(4, INT_W'($signed(p(2.5))), 0);
    apply(4, INT_W'($signed(p(3.5))), 0);
    apply(4, INT_W'($signed(p(-2.5))), 0);
    apply(4, INT_W'($signed(p(0.49))), 0);
    apply(4, INT_W'($signed(p(2.0 ** 40))), 0);          // saturate
    apply(4, INT_W'($signed(p(-(2.0 ** 40)))), 0);
    apply(4, nar, 0);
    apply(4, maxp, 0);
    for (int c = 5; c < 8; c++) apply(c, one, two);      // illegal codes give 0
    // random
    for (int i = 0; i < NRAND; i++) begin
      apply(0, rnd_posit(), rnd_posit());
      apply(1, rnd_posit(), rnd_posit());
      apply(2, rnd_posit(), rnd_posit());
      apply(3, ($urandom_range(1) == 0) ? $urandom : INT_W'($signed(16'($urandom))), 0);
      apply(4, rnd_posit(), 0);
    end
    $display("mechanisms: add=%0d sub=%0d mul=%0d i2p=%0d p2i=%0d illegal=%0d", n_op[0], n_op[1],
             n_op[2], n_op[3], n_op[4], n_op[5] + n_op[6] + n_op[7]);
    $display("mechanisms: nar=%0d zero_in=%0d cancel=%0d round_up=%0d tie=%0d clamp_max=%0d clamp_min=%0d int_sat=%0d",
             n_nar, n_zero_in, n_cancel, n_round_up, n_tie, n_clamp_max, n_clamp_min, n_int_sat);
    for (int i = 0; i < 6; i++) if (n_op[i] == 0) failures++;
    if (n_nar == 0 || n_zero_in == 0 || n_cancel == 0 || n_round_up == 0 || n_tie == 0 ||
        n_clamp_max == 0 || n_clamp_min == 0 || n_int_sat == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_posit_normalizer: checks the NORMALIZATION block on its own.
// Random bundles (sign, scale from -80 to 80, random fraction with a random
// number of leading zeros) are applied; the output must be the (16,2) posit
// nearest to the bundle's exact value frac * 2^(scale-(FW-2)), ties to even
// on the bit string, saturating at maxpos/minpos (posit_ref_pkg). Zero and NaR
// flags, an all-zero fraction and exact ties are also applied. One case per clock.
module tb_posit_normalizer;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  localparam int N = 16, ES = 2, INT_W = 32;
  localparam int FW = bundle_fw(N, ES, INT_W);
  localparam int SW = scale_w(N, ES, INT_W);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic nar, zero, sign, ru, cl;
  logic signed [SW-1:0] scale;
  logic [FW-1:0] frac;
  logic [N-1:0] p;
  int checks = 0, failures = 0, ties = 0, clamps = 0;

  posit_normalizer #(.N(N), .ES(ES), .INT_W(INT_W)) dut (
    .nar_i(nar), .zero_i(zero), .sign_i(sign), .scale_i(scale), .frac_i(frac),
    .posit_o(p), .round_up_o(ru), .clamp_o(cl));

  task automatic run(input logic s, input int sc, input logic [FW-1:0] f, input logic z, input logic n);
    logic [N-1:0] e;
    real v;
    nar = n;
    zero = z;
    sign = s;
    scale = SW'(sc);
    frac = f;
    @(posedge clk);
    #1;
    v = real'(f) * (2.0 ** real'(sc - (FW - 2)));
    if (s) v = -v;
    if (n) e = 16'h8000;
    else if (z) e = 0;
    else e = N'(from_real(v, N, ES));
    if (!n && !z && is_tie(v, N, ES)) ties++;
    if (cl) clamps++;
    checks++;
    if (p !== e) begin
      failures++;
      if (failures < 10) $display("FAIL s=%b sc=%0d f=%h got=%h exp=%h", s, sc, f, p, e);
    end
  endtask

  function automatic logic [FW-1:0] rnd_frac();
    logic [FW-1:0] f;
    for (int i = 0; i < FW; i++) f[i] = 1'($urandom);
    return f >> $urandom_range(FW - 1);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(0, 0, {2'b01, {(FW-2){1'b0}}}, 0, 0);                    // 1.0
    run(1, 0, {2'b01, {(FW-2){1'b0}}}, 0, 0);                    // -1.0
    run(0, 0, {2'b01, 11'b0, 1'b1, {(FW-14){1'b0}}}, 0, 0);      // 1 + 2^-12: tie, stays 1
    run(0, 0, {2'b01, 10'b0, 2'b11, {(FW-14){1'b0}}}, 0, 0);     // 1 + 3*2^-12: tie, rounds up
    run(0, 3, '0, 0, 0);                                         // zero fraction
    run(0, 3, 1, 1, 0);                                          // zero flag
    run(0, 3, 1, 0, 1);                                          // NaR flag
    run(0, 70, rnd_frac() | 1, 0, 0);                            // above maxpos
    run(1, -90, rnd_frac() | 1, 0, 0);                           // below minpos
    for (int i = 0; i < 40000; i++)
      run(1'($urandom), $urandom_range(160) - 80 + (FW - 2) / 2, rnd_frac(), 0, 0);
    $display("ties=%0d clamps=%0d", ties, clamps);
    if (ties == 0 || clamps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

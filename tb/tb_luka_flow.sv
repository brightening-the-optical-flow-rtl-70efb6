// tb_luka_flow: optical-flow workload on the posit arithmetic unit, (16,2).
//
// Runs the arithmetic of the Lucas-Kanade method through the unit, one
// operation per clock, the way software on the host core would issue it:
//  - two 14x14 8-bit frames are generated from a smooth textured pattern, the
//    second one moved by (+0.3, +0.2) pixels;
//  - pixels are converted with int2pos and scaled by 1/16 (norm = 16) with a
//    posit multiply;
//  - gradients Ix, Iy (neighbour differences) and It (frame difference) are
//    posit subtractions;
//  - for each 5x5 window the sums of Ix*Ix, Ix*Iy, Iy*Iy, Ix*It, Iy*It are
//    posit multiply-adds, and Cramer's rule gives the determinant and the two
//    numerators with posit multiplies and subtractions.
// Every result of the unit is compared bit for bit with posit_ref_pkg. The
// final two divisions are done here in real arithmetic, as the unit has no
// divider. The flow is then compared with a double-precision run of the same
// algorithm on the same frames. The maximum difference must stay below 0.01
// pixel. The window size and the test pattern are this testbench's choices.
module tb_luka_flow;
  import posit_ref_pkg::*;

  localparam int N = 16, ES = 2, INT_W = 32;
  localparam int W = 14, WIN = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [2:0] op;
  logic [INT_W-1:0] a, b, res;
  logic illegal, ru, cl;
  posit_core dut (.op_i(op), .operand_a_i(a), .operand_b_i(b), .result_o(res),
                  .illegal_op_o(illegal), .round_up_o(ru), .clamp_o(cl));

  int checks = 0, failures = 0, ops = 0;

  task automatic pau(input int code, input logic [INT_W-1:0] xa, input logic [INT_W-1:0] xb,
                     output logic [INT_W-1:0] r);
    longint unsigned e;
    op = 3'(code);
    a  = xa;
    b  = xb;
    @(posedge clk);
    #1;
    e = expected_result(code, 64'(xa), 64'(xb), N, ES, INT_W);
    checks++;
    ops++;
    if (res !== INT_W'(e)) begin
      failures++;
      if (failures < 10) $display("FAIL op=%0d a=%h b=%h got=%h exp=%h", code, xa, xb, res, INT_W'(e));
    end
    r = res;
  endtask

  function automatic real rp(input logic [INT_W-1:0] p);
    return to_real(64'(p[N-1:0]), N, ES);
  endfunction

  function automatic int pixel(input real x, input real y);
    real v;
    v = 128.0 + 50.0 * $sin(0.6 * x + 0.25 * y) + 40.0 * $cos(0.35 * y - 0.45 * x);
    return int'($floor(v + 0.5));
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // working data of the flow computation
  int img1 [W][W];
  int img2 [W][W];
  logic [INT_W-1:0] p1 [W][W];
  logic [INT_W-1:0] p2 [W][W];
  logic [INT_W-1:0] gx [W][W];
  logic [INT_W-1:0] gy [W][W];
  logic [INT_W-1:0] gt [W][W];
  logic [INT_W-1:0] inv_norm, t, s[5], prod, det, t2, nu, nv;
  real dx [W][W];
  real dy [W][W];
  real dt [W][W];
  real sd[5], det_p, u_p, v_p, u_d, v_d, det_d;
  real max_err = 0.0;
  int points = 0;
  int x0, y0;

  // keeps the largest flow difference seen and counts the windows (two
  // components per window)
  task automatic record(input real d);
    real e;
    e = (d < 0.0) ? -d : d;
    if (e > max_err) max_err = e;
    points++;
  endtask

  initial begin
    inv_norm = INT_W'($signed(N'(from_real(1.0 / 16.0, N, ES))));
    for (int y = 0; y < W; y++)
      for (int x = 0; x < W; x++) begin
        img1[y][x] = pixel(real'(x), real'(y));
        img2[y][x] = pixel(real'(x) - 0.3, real'(y) - 0.2);
        pau(3, INT_W'(img1[y][x]), 0, t);
        pau(2, t, inv_norm, p1[y][x]);
        pau(3, INT_W'(img2[y][x]), 0, t);
        pau(2, t, inv_norm, p2[y][x]);
      end
    for (int y = 0; y < W - 1; y++)
      for (int x = 0; x < W - 1; x++) begin
        pau(1, p1[y][x+1], p1[y][x], gx[y][x]);
        pau(1, p1[y+1][x], p1[y][x], gy[y][x]);
        pau(1, p2[y][x], p1[y][x], gt[y][x]);
        dx[y][x] = real'(img1[y][x+1] - img1[y][x]) / 16.0;
        dy[y][x] = real'(img1[y+1][x] - img1[y][x]) / 16.0;
        dt[y][x] = real'(img2[y][x] - img1[y][x]) / 16.0;
      end
    for (y0 = 0; y0 + WIN <= W - 1; y0++)
      for (x0 = 0; x0 + WIN <= W - 1; x0++) begin
        foreach (s[i]) s[i] = '0;
        foreach (sd[i]) sd[i] = 0.0;
        for (int y = y0; y < y0 + WIN; y++)
          for (int x = x0; x < x0 + WIN; x++) begin
            pau(2, gx[y][x], gx[y][x], prod); pau(0, s[0], prod, s[0]);
            pau(2, gx[y][x], gy[y][x], prod); pau(0, s[1], prod, s[1]);
            pau(2, gy[y][x], gy[y][x], prod); pau(0, s[2], prod, s[2]);
            pau(2, gx[y][x], gt[y][x], prod); pau(0, s[3], prod, s[3]);
            pau(2, gy[y][x], gt[y][x], prod); pau(0, s[4], prod, s[4]);
            sd[0] += dx[y][x] * dx[y][x];
            sd[1] += dx[y][x] * dy[y][x];
            sd[2] += dy[y][x] * dy[y][x];
            sd[3] += dx[y][x] * dt[y][x];
            sd[4] += dy[y][x] * dt[y][x];
          end
        // Cramer's rule: det = Sxx*Syy - Sxy^2, u = (Sxy*Syt - Syy*Sxt)/det,
        // v = (Sxy*Sxt - Sxx*Syt)/det
        pau(2, s[0], s[2], t);  pau(2, s[1], s[1], t2); pau(1, t, t2, det);
        pau(2, s[1], s[4], t);  pau(2, s[2], s[3], t2); pau(1, t, t2, nu);
        pau(2, s[1], s[3], t);  pau(2, s[0], s[4], t2); pau(1, t, t2, nv);
        det_d = sd[0] * sd[2] - sd[1] * sd[1];
        det_p = rp(det);
        if ((det_d > 0.001) && (det_p != 0.0)) begin
          u_p = rp(nu) / det_p;
          v_p = rp(nv) / det_p;
          u_d = (sd[1] * sd[4] - sd[2] * sd[3]) / det_d;
          v_d = (sd[1] * sd[3] - sd[0] * sd[4]) / det_d;
          record(u_p - u_d);
          record(v_p - v_d);
        end
      end
    $display("flow components=%0d unit operations=%0d max |flow(posit16,2) - flow(double)| = %f px",
             points, ops, max_err);
    checks++;
    if (points == 0 || max_err > 0.01) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

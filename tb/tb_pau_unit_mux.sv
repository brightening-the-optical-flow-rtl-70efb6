// tb_pau_unit_mux: drives three random bundles and each select value, and
// checks that the output is the selected unit's bundle (the zero bundle when
// no unit is selected). One case per clock.
module tb_pau_unit_mux;
  import posit_pkg::*;
  localparam int N = 16, ES = 2, INT_W = 32;
  localparam int FW = bundle_fw(N, ES, INT_W);
  localparam int SW = scale_w(N, ES, INT_W);
  localparam int BW = 3 + SW + FW;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  pau_unit_e sel;
  logic [BW-1:0] bc, bm, ba, bo, bexp;
  int checks = 0, failures = 0;

  logic nar, zero, sign;
  logic signed [SW-1:0] scale;
  logic [FW-1:0] frac;

  pau_unit_mux #(.N(N), .ES(ES), .INT_W(INT_W)) dut (
    .sel_i(sel),
    .cv_nar_i(bc[BW-1]), .mul_nar_i(bm[BW-1]), .add_nar_i(ba[BW-1]),
    .cv_zero_i(bc[BW-2]), .mul_zero_i(bm[BW-2]), .add_zero_i(ba[BW-2]),
    .cv_sign_i(bc[BW-3]), .mul_sign_i(bm[BW-3]), .add_sign_i(ba[BW-3]),
    .cv_scale_i(bc[FW +: SW]), .mul_scale_i(bm[FW +: SW]), .add_scale_i(ba[FW +: SW]),
    .cv_frac_i(bc[FW-1:0]), .mul_frac_i(bm[FW-1:0]), .add_frac_i(ba[FW-1:0]),
    .nar_o(nar), .zero_o(zero), .sign_o(sign), .scale_o(scale), .frac_o(frac));
  assign bo = {nar, zero, sign, scale, frac};

  function automatic logic [BW-1:0] rnd();
    logic [BW-1:0] v;
    for (int i = 0; i < BW; i++) v[i] = 1'($urandom);
    return v;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      sel = pau_unit_e'(i % 4);
      bc = rnd();
      bm = rnd();
      ba = rnd();
      case (sel)
        UNIT_CONV: bexp = bc;
        UNIT_MUL:  bexp = bm;
        UNIT_ADD:  bexp = ba;
        default:   bexp = {1'b0, 1'b1, {(BW-2){1'b0}}};
      endcase
      @(posedge clk);
      #1;
      checks++;
      if (bo !== bexp) begin
        failures++;
        if (failures < 10) $display("FAIL sel=%0d got=%h exp=%h", sel, bo, bexp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

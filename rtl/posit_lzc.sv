// posit_lzc: leading-zero counter used by the posit decoder and the normalizer.
//
// Counts the zero bits above the most significant one of in_i. When in_i is all
// zero the count equals W. Purely combinational; a priority scan from the LSB up
// lets the last (highest) one found win. Helper of this design, not a block the
// source names.
module posit_lzc #(
  parameter int W  = 16,
  parameter int CW = $clog2(W + 1)
) (
  input  logic [W-1:0]  in_i,
  output logic [CW-1:0] count_o
);
  always_comb begin
    count_o = CW'(W);
    for (int i = 0; i < W; i++) begin
      if (in_i[i]) count_o = CW'(W - 1 - i);
    end
  end
endmodule

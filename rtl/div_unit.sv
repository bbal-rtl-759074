// div_unit: Div Unit of the nonlinear unit (paper Fig. 6, step 5): N signed
// integer dividers, elementwise, quotient truncated towards zero. The paper
// stresses full-precision integer dividers; a zero divisor gives a zero
// quotient (own choice). Purely combinational.
module div_unit #(
  parameter int unsigned N  = 16,
  parameter int unsigned W  = 32
) (
  input  logic signed [W-1:0] num [N],
  input  logic signed [W-1:0] den [N],
  output logic signed [W-1:0] quo [N]
);
  always_comb
    for (int i = 0; i < N; i++) begin
      if (den[i] == '0) quo[i] = '0;
      else              quo[i] = num[i] / den[i];
    end
endmodule

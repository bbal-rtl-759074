// nl_mul_unit: Mul Unit of the nonlinear unit (paper Fig. 6): N signed
// integer multipliers, elementwise. It is the redundant unit that the
// paper says sits idle during softmax; here it forms x * sigmoid(x) for
// SILU. Purely combinational.
module nl_mul_unit #(
  parameter int unsigned N  = 16,
  parameter int unsigned AW = 16,
  parameter int unsigned BW = 16
) (
  input  logic signed [AW-1:0]    a [N],
  input  logic signed [BW-1:0]    b [N],
  output logic signed [AW+BW-1:0] p [N]
);
  always_comb
    for (int i = 0; i < N; i++) p[i] = (AW+BW)'(a[i]) * (AW+BW)'(b[i]);
endmodule

// adder_tree: sums N signed values with a balanced tree of two-input
// adders (paper Fig. 6 "Adder Tree", step 4; the softmax denominator).
// Each level widens by one bit, so no overflow is possible. N must be a
// power of two. Purely combinational; the nonlinear unit registers the
// sum in its buffer.
module adder_tree #(
  parameter int unsigned N  = 16,
  parameter int unsigned W  = 16,
  localparam int unsigned L  = $clog2(N),
  localparam int unsigned OW = W + L
) (
  input  logic signed [W-1:0]  in_val [N],
  output logic signed [OW-1:0] sum
);
  // level k holds N >> k partial sums
  logic signed [OW-1:0] lvl [L+1][N];

  always_comb begin
    for (int k = 0; k <= L; k++)
      for (int i = 0; i < N; i++) lvl[k][i] = '0;
    for (int i = 0; i < N; i++) lvl[0][i] = OW'(in_val[i]);
    for (int k = 1; k <= L; k++)
      for (int i = 0; i < (N >> k); i++)
        lvl[k][i] = lvl[k-1][2*i] + lvl[k-1][2*i+1];
    sum = lvl[L][0];
  end
endmodule

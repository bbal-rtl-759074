// max_unit: running maximum over a vector of FP16 results that arrives
// LANES values per cycle (paper Fig. 7 "MAX", Sec. IV-C).
//
// It keeps two results, because the paper shares this unit between two
// users: the largest value (signed order, for the nonlinear unit, e.g. the
// max subtracted in softmax) and the largest exponent field (for the output
// encoder's shared exponent, so that encoder needs no comparator). The two
// outputs are this design's reading of "the value output by the max unit
// can be used by either the nonlinear unit or the output encoder".
// in_first restarts the search with the current beat. Results are
// registered: valid the cycle after the last beat.
module max_unit #(
  parameter int unsigned LANES = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic [LANES-1:0][15:0] in_data,
  output logic [15:0]            max_val,
  output logic [4:0]             max_exp
);
  // order key: larger key <=> larger FP16 value
  function automatic logic [15:0] fkey(input logic [15:0] x);
    return x[15] ? ~x : {1'b1, x[14:0]};
  endfunction

  logic [15:0] bv, v0;
  logic [4:0]  be, e0;

  always_comb begin
    v0 = in_first ? in_data[0] : max_val;
    e0 = in_first ? in_data[0][14:10] : max_exp;
    bv = v0;
    be = e0;
    for (int i = 0; i < LANES; i++) begin
      if (fkey(in_data[i]) > fkey(bv)) bv = in_data[i];
      if (in_data[i][14:10] > be)      be = in_data[i][14:10];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_val <= 16'h0000;
      max_exp <= 5'd0;
    end else if (in_valid) begin
      max_val <= bv;
      max_exp <= be;
    end
  end
endmodule

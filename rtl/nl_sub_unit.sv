// nl_sub_unit: SUB Unit of the nonlinear unit (paper Fig. 6, step 2).
//
// Subtracts the block maximum from every element (the x - max of a stable
// softmax). All elements share the block exponent, so this is an integer
// subtraction. The difference is put back into BBFP(M,O) form under the
// same shared exponent, ready to address the LUT: flag=0 with the magnitude
// as mantissa when it fits M bits, else flag=1 with the magnitude shifted
// right by (M-O), saturating at the largest high mantissa. The
// renormalisation is this design's own reading of how the result stays in
// BBFP. Purely combinational.
module nl_sub_unit #(
  parameter int unsigned N  = 16,
  parameter int unsigned M  = 10,
  parameter int unsigned O  = 5,
  localparam int unsigned VW = M + (M - O) + 1
) (
  input  logic signed [VW-1:0] in_val [N],
  input  logic signed [VW-1:0] in_max,
  output logic [N-1:0]         out_sign,
  output logic [N-1:0]         out_flag,
  output logic [N-1:0][M-1:0]  out_mant
);
  localparam int unsigned SH = M - O;
  localparam int unsigned DW = VW + 1;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [DW-1:0] d;
      logic [DW-1:0]        mag;
      d   = DW'(in_val[i]) - DW'(in_max);
      mag = d[DW-1] ? DW'(-d) : DW'(d);
      out_sign[i] = d[DW-1];
      if (mag < DW'(1 << M)) begin
        out_flag[i] = 1'b0;
        out_mant[i] = mag[M-1:0];
      end else if ((mag >> SH) < DW'(1 << M)) begin
        out_flag[i] = 1'b1;
        out_mant[i] = M'(mag >> SH);
      end else begin
        out_flag[i] = 1'b1;
        out_mant[i] = '1;
      end
    end
  end
endmodule

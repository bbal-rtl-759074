// fp_encoder: converts a signed fixed-point number with a binary scale into
// FP16 (paper Fig. 7 "FP Encoder"; also the Output Encoder of the nonlinear
// unit, Fig. 6).
//
// The value is in_val * 2^in_scale. A leading-one search normalises the
// magnitude to an 11-bit significand; the biased exponent is the leading
// one's position plus in_scale plus 15. Results too small for a normal
// number become subnormals or zero. The paper gives only the block's name
// and purpose; rounding (truncation towards zero), saturation of overflow
// to the largest finite FP16 (0x7BFF with the sign) and +0 for a zero
// input are this design's own choices. Purely combinational.
module fp_encoder #(
  parameter int unsigned IN_W = 21
) (
  input  logic signed [IN_W-1:0] in_val,
  input  logic signed [7:0]      in_scale,
  output logic [15:0]            out_fp
);
  logic [IN_W-1:0] mag;
  logic            sgn;
  int              lead, ebias, sh;
  logic [IN_W+10:0] wide;

  always_comb begin
    sgn  = in_val[IN_W-1];
    mag  = sgn ? IN_W'(-in_val) : IN_W'(in_val);
    lead = 0;
    for (int i = 0; i < IN_W; i++)
      if (mag[i]) lead = i;
    ebias = lead + int'(in_scale) + 15;
    wide  = '0;
    sh    = 0;
    if (mag == '0) begin
      out_fp = 16'h0000;
    end else if (ebias >= 31) begin
      out_fp = {sgn, 15'h7BFF};
    end else if (ebias >= 1) begin
      // place the leading one at bit 10 of wide
      wide = (IN_W+11)'(mag) << 10;
      wide = wide >> lead;
      out_fp = {sgn, ebias[4:0], wide[9:0]};
    end else begin
      // subnormal: field = mag * 2^(in_scale + 24)
      sh = int'(in_scale) + 24;
      wide = (IN_W+11)'(mag);
      if (sh >= 0) wide = wide << sh;
      else         wide = wide >> (-sh);
      out_fp = {sgn, 5'd0, wide[9:0]};
    end
  end
endmodule

// fp_adder: FP16 adder (paper Fig. 7 "FP Adder"). It accumulates the FP16
// results of successive PE-array tiles, whose shared exponents differ, so
// the sum has to be formed in floating point.
//
// Both operands are unpacked to 11-bit significands, the one with the larger
// exponent is shifted left onto the smaller one's scale (at most 30 bits,
// so the exact sum fits 43 bits), the signed values are added exactly and
// fp_encoder normalises and truncates the sum. Only the name is in the
// paper; truncation towards zero, saturation instead of infinity and no
// special handling of Inf/NaN are own choices. Purely combinational.
module fp_adder (
  input  logic [15:0] a,
  input  logic [15:0] b,
  output logic [15:0] sum
);
  localparam int unsigned SW = 43;
  logic [4:0]  ea, eb, emin;
  logic [10:0] sa, sb;
  logic signed [SW-1:0] va, vb, vs;
  logic signed [7:0]    scale;

  always_comb begin
    ea   = (a[14:10] == 5'd0) ? 5'd1 : a[14:10];
    eb   = (b[14:10] == 5'd0) ? 5'd1 : b[14:10];
    sa   = {(a[14:10] != 5'd0), a[9:0]};
    sb   = {(b[14:10] != 5'd0), b[9:0]};
    emin = (ea < eb) ? ea : eb;
    va   = SW'(sa) << (ea - emin);
    vb   = SW'(sb) << (eb - emin);
    if (a[15]) va = -va;
    if (b[15]) vb = -vb;
    vs    = va + vb;
    scale = 8'(signed'({3'b000, emin})) - 8'sd25;
  end

  fp_encoder #(.IN_W(SW)) u_norm (.in_val(vs), .in_scale(scale), .out_fp(sum));
endmodule

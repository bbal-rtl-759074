// bbfp_psum_adder: sparse partial-sum adder for BBFP products (paper
// Fig. 5(b), Eq. 11-14).
//
// The compressed product (2-bit flag, sign, 2M-bit mantissa) stands for
// mant << k with k = (M-O) * (flag_a + flag_b). Instead of an adder as wide
// as the accumulator, a 2M-bit adder adds the product to the 2M-bit window
// of the partial sum that starts at bit k (the window is chosen by a mux
// driven by the flags); the partial-sum bits below the window pass
// unchanged, and the bits above it only see the adder's carry, through a
// carry chain. The partial sum is a two's-complement ACC_W-bit value (own
// choice: the paper draws it as sign plus mantissa); a negative product is
// subtracted in the window and the chain then propagates a borrow.
// Purely combinational.
module bbfp_psum_adder #(
  parameter int unsigned M     = 6,
  parameter int unsigned O     = 3,
  parameter int unsigned ACC_W = 21
) (
  input  logic signed [ACC_W-1:0] psum_in,
  input  logic                    p_sign,
  input  logic [1:0]              p_flag,
  input  logic [2*M-1:0]          p_mant,
  output logic signed [ACC_W-1:0] psum_out
);
  localparam int unsigned SH = M - O;
  localparam int unsigned HW = ACC_W - 2*M;   // upper part in the shifted frame

  logic [1:0]       nshift;
  logic [ACC_W-1:0] frame;      // psum >>> k
  logic [2*M-1:0]   win;
  logic [2*M:0]     wsum;
  logic [HW-1:0]    hi_in, hi_out;
  logic [ACC_W-1:0] low_mask, res;

  always_comb begin
    nshift = 2'(p_flag[1]) + 2'(p_flag[0]);
    // 3:1 window mux, as drawn in Fig. 5(b)
    unique case (nshift)
      2'd0:    begin frame = psum_in;            low_mask = '0; end
      2'd1:    begin frame = psum_in >>> SH;     low_mask = ACC_W'((1 << SH) - 1); end
      default: begin frame = psum_in >>> (2*SH); low_mask = ACC_W'((1 << (2*SH)) - 1); end
    endcase
    win   = frame[2*M-1:0];
    hi_in = frame[ACC_W-1:2*M];
    // the 2M-bit adder / subtractor
    if (p_sign) wsum = {1'b0, win} + {1'b0, ~p_mant} + (2*M+1)'(1);
    else        wsum = {1'b0, win} + {1'b0, p_mant};
  end

  // add: carry = wsum[2M]; subtract: borrow = not wsum[2M]
  carry_chain #(.W(HW)) u_chain (
    .a   (hi_in),
    .cin (p_sign ? ~wsum[2*M] : wsum[2*M]),
    .dec (p_sign),
    .s   (hi_out)
  );

  always_comb begin
    unique case (nshift)
      2'd0:    res = {hi_out, wsum[2*M-1:0]};
      2'd1:    res = {hi_out, wsum[2*M-1:0]} << SH;
      default: res = {hi_out, wsum[2*M-1:0]} << (2*SH);
    endcase
    psum_out = signed'((res & ~low_mask) | (psum_in & low_mask));
  end
endmodule

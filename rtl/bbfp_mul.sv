// bbfp_mul: multiplies two BBFP(M,O) elements (paper Fig. 5(a), Eq. 10).
//
// An M x M unsigned multiplier forms the mantissa product, the sign is the
// XOR of the two signs, and the two flags select how far the product would
// be shifted: 0, (M-O) or 2(M-O) bits. The paper observes that the shifted
// product always has zero bits at known places, so the result is kept
// compressed: the 2-bit flag {flag_a, flag_b} plus the sign and the 2M-bit
// product; the partial-sum adder expands it (bbfp_psum_adder).
// The shared-exponent addition sits in the PE (see pe.sv).
// p_flag is therefore just the two input flags side by side (a plain
// wire, by design). Purely combinational.
module bbfp_mul #(
  parameter int unsigned M = 6,
  parameter int unsigned O = 3
) (
  input  logic           a_sign,
  input  logic           a_flag,
  input  logic [M-1:0]   a_mant,
  input  logic           b_sign,
  input  logic           b_flag,
  input  logic [M-1:0]   b_mant,
  output logic           p_sign,
  output logic [1:0]     p_flag,
  output logic [2*M-1:0] p_mant
);
  always_comb begin
    p_mant = (2*M)'(a_mant) * (2*M)'(b_mant);
    p_sign = a_sign ^ b_sign;
    p_flag = {a_flag, b_flag};
  end
endmodule

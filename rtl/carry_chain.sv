// carry_chain: the paper's simplified adder for the bits of a partial sum
// above the product window (Fig. 5(b), Eq. 13-14). Each bit is one basic
// unit, S_i = C_i xor a_i and C_i+1 = C_i and a_i, i.e. an incrementer.
// For subtraction of a negative product the same chain propagates a borrow
// instead (C_i+1 = C_i and not a_i); that mode is this design's own
// extension, since the accumulator here is two's complement.
// Purely combinational: s = a + cin (dec=0) or a - cin (dec=1), mod 2^W.
module carry_chain #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] a,
  input  logic         cin,
  input  logic         dec,
  output logic [W-1:0] s
);
  logic [W:0] c;
  assign c[0] = cin;
  for (genvar i = 0; i < W; i++) begin : g_unit
    assign s[i]   = c[i] ^ a[i];
    assign c[i+1] = c[i] & (a[i] ^ dec);
  end
endmodule

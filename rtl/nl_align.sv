// nl_align: Align Exponent Unit of the nonlinear unit (paper Fig. 6, step 1).
//
// Converts the FP16 input vector into one BBFP(M,O) block with
// bbfp_encoder (shared exponent Max(E)-(M-O)) and, from the encoded block,
// the signed integer value of every element, v = +-mant << ((M-O)*flag),
// and the largest of them (the "Max" output that the paper's figure sends on
// to the SUB unit). The max is taken over the BBFP values, which share one
// scale, so a plain integer comparison suffices (own choice).
// With EXT_MAX=1 the unit has no comparators of its own: the block's
// largest exponent (max_exp_in) and largest value (max_in, FP16) come from
// the accelerator's max unit, as the paper suggests ("the value output by
// the max unit can be used by either the nonlinear unit or the output
// encoder"). The largest value is encoded under the same shared exponent by
// a one-lane encoder; since the encoding is monotonic, its integer value is
// exactly the largest out_val.
// Timing: one register stage (inside the encoders); out_val and out_max are
// combinational from it, valid together with out_valid. max_exp_in and
// max_in are sampled with in_valid.
module nl_align #(
  parameter int unsigned N  = 16,
  parameter int unsigned M  = 10,
  parameter int unsigned O  = 5,
  parameter bit          EXT_MAX = 1'b0,
  localparam int unsigned VW = M + (M - O) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [N-1:0][15:0]       in_data,
  input  logic [4:0]               max_exp_in,   // used when EXT_MAX=1
  input  logic [15:0]              max_in,       // used when EXT_MAX=1
  output logic                     out_valid,
  output logic [4:0]               out_es,
  output logic [N-1:0]             out_sign,
  output logic [N-1:0]             out_flag,
  output logic [N-1:0][M-1:0]      out_mant,
  output logic signed [VW-1:0]     out_val [N],
  output logic signed [VW-1:0]     out_max
);
  localparam int unsigned SH = M - O;

  function automatic logic signed [VW-1:0] ival(input logic s, input logic f,
                                                 input logic [M-1:0] m);
    logic signed [VW-1:0] mag;
    mag = f ? (VW'(m) << SH) : VW'(m);
    return s ? -mag : mag;
  endfunction

  bbfp_encoder #(.N(N), .M(M), .O(O), .EXT_MAX(EXT_MAX)) u_enc (
    .clk, .rst_n, .in_valid, .in_data, .max_exp_in,
    .out_valid, .out_es, .out_sign, .out_flag, .out_mant
  );

  always_comb
    for (int i = 0; i < N; i++) out_val[i] = ival(out_sign[i], out_flag[i], out_mant[i]);

  if (EXT_MAX) begin : g_ext_max
    logic           mx_valid, mx_sign, mx_flag;
    logic [4:0]     mx_es;
    logic [M-1:0]   mx_mant;
    bbfp_encoder #(.N(1), .M(M), .O(O), .EXT_MAX(1'b1)) u_max_enc (
      .clk, .rst_n, .in_valid, .in_data(max_in), .max_exp_in,
      .out_valid(mx_valid), .out_es(mx_es), .out_sign(mx_sign), .out_flag(mx_flag),
      .out_mant(mx_mant)
    );
    assign out_max = ival(mx_sign, mx_flag, mx_mant);
  end else begin : g_int_max
    always_comb begin
      out_max = out_val[0];
      for (int i = 1; i < N; i++)
        if (out_val[i] > out_max) out_max = out_val[i];
    end
  end
endmodule

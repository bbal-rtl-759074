// pe: one processing element of the weight-stationary BBFP array (paper
// Fig. 7, PE (1) and (2)).
//
// The PE holds one preloaded BBFP weight. Each cycle with a valid input
// activation it multiplies the activation by the weight (bbfp_mul), adds
// the compressed product to the partial sum coming from above
// (bbfp_psum_adder) and registers the result for the PE below; a mux
// passes the incoming partial sum unchanged when no activation is valid
// (own choice of select). The activation is registered and forwarded to
// the PE on the right.
//
// Because a whole block shares one exponent, only one PE needs an exponent
// adder. EXP_ADD=1 builds the paper's PE (1): it stores the weight block's
// exponent and registers activation exponent + weight exponent as the
// forwarded exponent. EXP_ADD=0 builds PE (2): the exponent from above is
// wired straight through (exponent bypass).
// Timing: psum_out, a_*_out and (for EXP_ADD=1) exp_out change one clock
// after the inputs; for EXP_ADD=0 exp_out follows exp_in combinationally.
module pe #(
  parameter int unsigned M       = 6,
  parameter int unsigned O       = 3,
  parameter int unsigned ACC_W   = 21,
  parameter bit          EXP_ADD = 1'b0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight preload
  input  logic                    w_load,
  input  logic                    w_sign,
  input  logic                    w_flag,
  input  logic [M-1:0]            w_mant,
  input  logic [4:0]              w_exp,
  // activation in (from the left) and forwarded (to the right)
  input  logic                    a_valid_in,
  input  logic                    a_sign_in,
  input  logic                    a_flag_in,
  input  logic [M-1:0]            a_mant_in,
  input  logic [4:0]              a_exp_in,
  output logic                    a_valid_out,
  output logic                    a_sign_out,
  output logic                    a_flag_out,
  output logic [M-1:0]            a_mant_out,
  // partial sum (from above, to below)
  input  logic signed [ACC_W-1:0] psum_in,
  output logic signed [ACC_W-1:0] psum_out,
  // block exponent (from above, to below)
  input  logic [5:0]              exp_in,
  output logic [5:0]              exp_out
);
  logic           wr_sign, wr_flag;
  logic [M-1:0]   wr_mant;
  logic           p_sign;
  logic [1:0]     p_flag;
  logic [2*M-1:0] p_mant;
  logic signed [ACC_W-1:0] psum_add;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_sign <= 1'b0; wr_flag <= 1'b0; wr_mant <= '0;
    end else if (w_load) begin
      wr_sign <= w_sign; wr_flag <= w_flag; wr_mant <= w_mant;
    end
  end

  bbfp_mul #(.M(M), .O(O)) u_mul (
    .a_sign(a_sign_in), .a_flag(a_flag_in), .a_mant(a_mant_in),
    .b_sign(wr_sign),   .b_flag(wr_flag),   .b_mant(wr_mant),
    .p_sign(p_sign),    .p_flag(p_flag),    .p_mant(p_mant)
  );

  bbfp_psum_adder #(.M(M), .O(O), .ACC_W(ACC_W)) u_add (
    .psum_in(psum_in), .p_sign(p_sign), .p_flag(p_flag), .p_mant(p_mant),
    .psum_out(psum_add)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum_out    <= '0;
      a_valid_out <= 1'b0;
      a_sign_out  <= 1'b0;
      a_flag_out  <= 1'b0;
      a_mant_out  <= '0;
    end else begin
      psum_out    <= a_valid_in ? psum_add : psum_in;
      a_valid_out <= a_valid_in;
      a_sign_out  <= a_sign_in;
      a_flag_out  <= a_flag_in;
      a_mant_out  <= a_mant_in;
    end
  end

  if (EXP_ADD) begin : g_exp_adder
    logic [4:0] wr_exp;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wr_exp  <= '0;
        exp_out <= '0;
      end else begin
        if (w_load)     wr_exp  <= w_exp;
        if (a_valid_in) exp_out <= 6'(a_exp_in) + 6'(wr_exp);
      end
    end
  end else begin : g_exp_bypass
    assign exp_out = exp_in;
  end
endmodule

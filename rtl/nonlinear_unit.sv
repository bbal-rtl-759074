// nonlinear_unit: BBFP nonlinear computation unit (paper Sec. IV-B, Fig. 6).
//
// A vector of N FP16 values is turned into one BBFP(10,5) block by the
// Align Exponent unit. Its shared exponent selects the sub-table that the
// DMA fetches from external memory into the LUT file while the SUB unit
// computes x - max, so the load is overlapped with useful work. The BBFP
// mantissas then address the LUT directly, and the looked-up BBFP values
// go through the units the opcode asks for; the Output Encoder turns the
// integer result back into FP16. Data flows (the paper gives softmax and
// sigmoid, and names SILU and GELU as further functions; their data flow
// through the Mul unit is this design's choice):
//   NL_SOFTMAX: Align -> SUB -> LUT (e^d) -> Adder tree -> Div (e^d / sum)
//   NL_SIGMOID: Align -> LUT (1 + e^-x) -> Div (1 / y)
//   NL_SILU   : Align -> LUT (sigmoid x) -> Mul (x * y)
//   NL_GELU   : Align -> LUT (Phi(x), the Gaussian CDF) -> Mul (x * y)
// Every stage is followed by a buffer register. The Control Unit is two
// state machines: the front end (Align, SUB with the DMA load, LUT read)
// and the back end (Adder tree, Div/Mul, Output encoder). When a vector's
// lookup is done it is handed to the back end together with copies of its
// opcode, shared exponent, values and table exponent, and the front end
// accepts the next vector at once, so its alignment and sub-table load
// overlap the previous vector's arithmetic (the split into two pipeline
// sections is this design's choice; the LUT file is single, so the
// front end cannot load a new sub-table before the previous lookup).
// SUB saturates differences larger than the block's range
// (|x - max| >= 2^(2M-O) units of the block), which happens only when
// negative inputs are far below the maximum.
// LUT address (own choice, 7 bits as in the paper): {sign, flag, top 5
// mantissa bits} of the operand, so each exponent owns one 128-entry table
// holding the values for both signs and both mantissa groups.
// With EXT_MAX=1 the Align unit takes the block's largest exponent and
// value from in_max_exp/in_max (the accelerator's max unit) instead of
// comparing the lanes itself; with EXT_MAX=0 these inputs are unused.
// Interface: in_valid/in_ready handshake, result in out_data with a one-
// cycle out_valid pulse, results in input order; latency 8 cycles plus
// the wait for the DMA.
module nonlinear_unit
  import bbal_pkg::*;
#(
  parameter int unsigned N  = 16,
  parameter int unsigned M  = 10,
  parameter int unsigned O  = 5,
  parameter int unsigned QF = 15,    // fraction bits of the softmax quotient
  parameter bit          EXT_MAX = 1'b0  // block max from outside (max unit)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  nl_op_e             in_op,
  input  logic [N-1:0][15:0] in_data,
  input  logic [4:0]         in_max_exp,   // largest exponent field (EXT_MAX=1)
  input  logic [15:0]        in_max,       // largest value, FP16 (EXT_MAX=1)
  output logic               out_valid,
  output logic [N-1:0][15:0] out_data,
  // external memory (sub-table loads)
  output logic               mem_req,
  output logic [14:0]        mem_addr,
  input  logic               mem_ready,
  input  logic               mem_rvalid,
  input  logic [15:0]        mem_rdata
);
  localparam int unsigned SH  = M - O;
  localparam int unsigned VW  = M + SH + 1;       // signed BBFP element value
  localparam int unsigned SW  = VW + $clog2(N);   // adder tree output
  localparam int unsigned XW  = 32;               // divider / multiplier result
  localparam int unsigned LAW = 7;
  localparam int unsigned LDW = M + 2;

  typedef enum logic [2:0] {
    S_IDLE, S_ALIGN, S_SUB, S_WAIT, S_LUTQ
  } state_e;                       // front end: Align .. LUT
  typedef enum logic [1:0] {
    B_IDLE, B_SUM, B_CALC, B_ENC
  } bstate_e;                      // back end: Adder tree .. Output encoder
  state_e  state;
  bstate_e bstate;
  nl_op_e  op;
  // copies of what the back end needs, taken at the hand-over, so that the
  // front end (and the DMA, which rewrites the LUT file) can go on
  nl_op_e                bk_op;
  logic [4:0]            bk_es, bk_lexp;
  logic signed [VW-1:0]  bk_val [N];
  logic                  hand;

  // ---------------- Align Exponent unit ----------------
  logic                  al_valid;
  logic [4:0]            al_es;
  logic [N-1:0]          al_sign, al_flag;
  logic [N-1:0][M-1:0]   al_mant;
  logic signed [VW-1:0]  al_val [N];
  logic signed [VW-1:0]  al_max;

  nl_align #(.N(N), .M(M), .O(O), .EXT_MAX(EXT_MAX)) u_align (
    .clk, .rst_n, .in_valid(in_valid && in_ready), .in_data,
    .max_exp_in(in_max_exp), .max_in(in_max),
    .out_valid(al_valid), .out_es(al_es), .out_sign(al_sign), .out_flag(al_flag),
    .out_mant(al_mant), .out_val(al_val), .out_max(al_max)
  );

  // buffer after Align
  logic [4:0]            b1_es;
  logic [N-1:0]          b1_sign, b1_flag;
  logic [N-1:0][M-1:0]   b1_mant;
  logic signed [VW-1:0]  b1_val [N];
  logic signed [VW-1:0]  b1_max;

  // ---------------- SUB unit ----------------
  logic [N-1:0]          sb_sign, sb_flag;
  logic [N-1:0][M-1:0]   sb_mant;
  logic [N-1:0]          b2_sign, b2_flag;
  logic [N-1:0][M-1:0]   b2_mant;

  nl_sub_unit #(.N(N), .M(M), .O(O)) u_sub (
    .in_val(b1_val), .in_max(b1_max),
    .out_sign(sb_sign), .out_flag(sb_flag), .out_mant(sb_mant)
  );

  // ---------------- DMA + LUT file ----------------
  logic              dma_start, dma_done;
  logic              lut_we, hdr_we;
  logic [LAW-1:0]    lut_waddr;
  logic [LDW-1:0]    lut_wdata;
  logic [4:0]        hdr_exp, lut_exp;
  logic              lut_rd;
  logic [N-1:0][LAW-1:0] lut_addr;
  logic [N-1:0][LDW-1:0] lut_q;

  nl_dma #(.LUT_AW(LAW), .LUT_DW(LDW)) u_dma (
    .clk, .rst_n, .start(dma_start), .fn(op), .exp_sel(al_es), .done(dma_done),
    .mem_req, .mem_addr, .mem_ready, .mem_rvalid, .mem_rdata,
    .lut_we, .lut_waddr, .lut_wdata, .hdr_we, .hdr_exp
  );

  lut_file #(.N(N), .AW(LAW), .DW(LDW)) u_lut (
    .clk, .rst_n, .wr_en(lut_we), .wr_addr(lut_waddr), .wr_data(lut_wdata),
    .hdr_we, .hdr_exp, .rd_en(lut_rd), .rd_addr(lut_addr), .rd_data(lut_q),
    .lut_exp
  );

  // LUT address mux: SUB output for softmax, Align output otherwise
  always_comb begin
    for (int i = 0; i < N; i++) begin
      if (op == NL_SOFTMAX) lut_addr[i] = {b2_sign[i], b2_flag[i], b2_mant[i][M-1 -: 5]};
      else                  lut_addr[i] = {b1_sign[i], b1_flag[i], b1_mant[i][M-1 -: 5]};
    end
  end

  // buffer after the LUT: signed integer value of each looked-up element
  logic signed [VW-1:0] b3_val [N];

  // ---------------- Adder tree ----------------
  logic signed [SW-1:0] at_sum, b4_sum;
  adder_tree #(.N(N), .W(VW)) u_tree (.in_val(b3_val), .sum(at_sum));

  // ---------------- Mul and Div units ----------------
  logic signed [2*VW-1:0] mu_p [N];
  logic signed [XW-1:0]   dv_num [N], dv_den [N], dv_q [N];
  nl_mul_unit #(.N(N), .AW(VW), .BW(VW)) u_mul (.a(bk_val), .b(b3_val), .p(mu_p));
  div_unit    #(.N(N), .W(XW))           u_div (.num(dv_num), .den(dv_den), .quo(dv_q));

  always_comb begin
    for (int i = 0; i < N; i++) begin
      if (bk_op == NL_SOFTMAX) begin
        dv_num[i] = XW'(b3_val[i]) <<< QF;
        dv_den[i] = XW'(b4_sum);
      end else begin
        dv_num[i] = XW'(1) <<< 30;
        dv_den[i] = XW'(b3_val[i]);
      end
    end
  end

  logic signed [XW-1:0] b5_res [N];
  logic signed [7:0]    b5_scale;

  // ---------------- Output encoder ----------------
  logic [N-1:0][15:0] enc_fp;
  for (genvar i = 0; i < N; i++) begin : g_enc
    fp_encoder #(.IN_W(XW)) u_fpenc (.in_val(b5_res[i]), .in_scale(b5_scale), .out_fp(enc_fp[i]));
  end

  // ---------------- Control unit ----------------
  assign in_ready  = (state == S_IDLE);
  assign dma_start = (state == S_ALIGN) && al_valid;
  assign lut_rd    = (state == S_WAIT) && dma_done;
  // hand-over from front to back end: the back end is free or leaving
  assign hand      = (state == S_LUTQ) && (bstate == B_IDLE || bstate == B_ENC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      bstate    <= B_IDLE;
      op        <= NL_SOFTMAX;
      bk_op     <= NL_SOFTMAX;
      bk_es     <= '0;
      bk_lexp   <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      b1_es <= '0; b1_sign <= '0; b1_flag <= '0; b1_mant <= '0; b1_max <= '0;
      b2_sign <= '0; b2_flag <= '0; b2_mant <= '0;
      b4_sum <= '0; b5_scale <= '0;
      for (int i = 0; i < N; i++) begin
        b1_val[i] <= '0; b3_val[i] <= '0; b5_res[i] <= '0; bk_val[i] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          op    <= in_op;
          state <= S_ALIGN;
        end
        S_ALIGN: if (al_valid) begin
          b1_es <= al_es; b1_sign <= al_sign; b1_flag <= al_flag; b1_mant <= al_mant;
          b1_val <= al_val; b1_max <= al_max;
          state <= S_SUB;
        end
        S_SUB: begin
          b2_sign <= sb_sign; b2_flag <= sb_flag; b2_mant <= sb_mant;
          state <= S_WAIT;
        end
        S_WAIT: if (dma_done) state <= S_LUTQ;
        S_LUTQ: if (hand) begin
          for (int i = 0; i < N; i++) begin
            logic signed [VW-1:0] mag;
            mag = lut_q[i][M] ? (VW'(lut_q[i][M-1:0]) <<< SH) : VW'(lut_q[i][M-1:0]);
            b3_val[i] <= lut_q[i][M+1] ? -mag : mag;
          end
          bk_op   <= op;
          bk_es   <= b1_es;
          bk_lexp <= lut_exp;
          bk_val  <= b1_val;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      unique case (bstate)
        B_IDLE: if (hand) bstate <= B_SUM;
        B_SUM: begin
          b4_sum <= at_sum;
          bstate <= B_CALC;
        end
        B_CALC: begin
          for (int i = 0; i < N; i++)
            b5_res[i] <= (bk_op == NL_SILU || bk_op == NL_GELU) ? XW'(mu_p[i]) : dv_q[i];
          unique case (bk_op)
            NL_SOFTMAX: b5_scale <= -8'(QF);
            NL_SIGMOID: b5_scale <= -8'sd6 - 8'(bk_lexp);
            default:    b5_scale <= 8'(bk_es) + 8'(bk_lexp) - 8'sd48;
          endcase
          bstate <= B_ENC;
        end
        B_ENC: begin
          out_data  <= enc_fp;
          out_valid <= 1'b1;
          bstate    <= hand ? B_SUM : B_IDLE;
        end
        default: bstate <= B_IDLE;
      endcase
    end
  end
endmodule

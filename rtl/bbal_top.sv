// bbal_top: the BBAL accelerator (paper Sec. IV-C, Fig. 7).
//
// It computes Y = X * W for a tile of ROWS activation vectors (a
// ROWS x K slice of X) against a K x COLS weight slice, K = ktiles * ROWS,
// and optionally passes Y through the nonlinear unit. External memory
// fills the input buffer with FP16 activation tiles (ROWS x ROWS values
// each) and the weight buffer with BBFP(6,3) weight tiles (encoded offline).
// For each of the ktiles K-steps the control unit
//   1. reads one weight tile and preloads it into the PE array, and reads
//      one activation tile, which the input encoder turns into one BBFP
//      block (the paper encodes "each 4x4 elements" together);
//   2. streams the ROWS activation vectors through the array and collects
//      the ROWS result vectors (integers plus the summed shared exponent)
//      in the output buffer;
//   3. converts them to FP16 (FP encoders) and adds them to the running
//      FP16 sums (FP adders), since successive K-steps have different
//      shared exponents.
// After the last K-step the max unit scans the sums. The data selector
// then sends the ROWS x COLS result either to the nonlinear unit
// (cmd_nl_en, with cmd_nl_op choosing softmax, sigmoid, SILU or GELU over the 16
// values), whose FP16 output leaves on nl_out_*, or to the output encoder,
// which re-encodes it as one BBFP(6,3) block using the max unit's largest
// exponent, so it needs no comparator of its own (enc_out_*).
// Own choices: the K-steps run one after another (no overlap of weight
// loading with computation), buffer depths, the command interface and the
// FP16 format for the FP adder and the nonlinear unit's input.
// Interface: cmd_valid/cmd_ready handshake; done pulses with the result.
// The external memory is outside the design: its write side is the
// ib_*/wb_* buffer ports, its read side for LUT sub-tables is mem_*.
module bbal_top
  import bbal_pkg::*;
#(
  parameter int unsigned IB_DEPTH = 64,   // activation tiles in the input buffer
  parameter int unsigned WB_DEPTH = 64,   // weight tiles in the weight buffer
  localparam int unsigned IB_AW = $clog2(IB_DEPTH),
  localparam int unsigned WB_AW = $clog2(WB_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // buffer fill from external memory
  input  logic               ib_we,
  input  logic [IB_AW-1:0]   ib_waddr,
  input  itile_t             ib_wdata,
  input  logic               wb_we,
  input  logic [WB_AW-1:0]   wb_waddr,
  input  wtile_t             wb_wdata,
  // command
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  logic [IB_AW-1:0]   cmd_ibase,
  input  logic [WB_AW-1:0]   cmd_wbase,
  input  logic [IB_AW:0]     cmd_ktiles,
  input  logic               cmd_nl_en,
  input  nl_op_e             cmd_nl_op,
  // results
  output logic               nl_out_valid,
  output logic [OTILE-1:0][15:0] nl_out_data,
  output logic               enc_out_valid,
  output otile_t             enc_out,
  output logic [15:0]        res_max,    // largest value of the last result
  output logic               done,
  // external memory read port for LUT sub-tables
  output logic               mem_req,
  output logic [MEM_AW-1:0]  mem_addr,
  input  logic               mem_ready,
  input  logic               mem_rvalid,
  input  logic [15:0]        mem_rdata
);
  localparam int unsigned T    = ROWS;            // activation vectors per tile
  localparam int unsigned OB_W = 6 + COLS * ACC_W;
  localparam int unsigned EBIAS2 = 2 * (15 + LIN_M - 1); // scale of a product

  typedef enum logic [3:0] {
    C_IDLE, C_RD, C_LOAD, C_FEED, C_DRAIN, C_ACC, C_MAX, C_SEL, C_NLWAIT, C_ENC
  } cstate_e;
  cstate_e state;

  logic [IB_AW-1:0] ibase;
  logic [WB_AW-1:0] wbase;
  logic [IB_AW:0]   ktiles, kt;
  logic             nl_en;
  nl_op_e           nl_op;
  logic [2:0]       cnt;        // vector counter within a tile
  logic [2:0]       ob_wcnt;

  // ---------------- buffers ----------------
  itile_t ib_q;
  wtile_t wb_q;
  logic   buf_rd;
  sram_buf #(.WIDTH($bits(itile_t)), .DEPTH(IB_DEPTH)) u_ibuf (
    .clk, .wr_en(ib_we), .wr_addr(ib_waddr), .wr_data(ib_wdata),
    .rd_en(buf_rd), .rd_addr(IB_AW'(ibase + kt[IB_AW-1:0])), .rd_data(ib_q)
  );
  sram_buf #(.WIDTH($bits(wtile_t)), .DEPTH(WB_DEPTH)) u_wbuf (
    .clk, .wr_en(wb_we), .wr_addr(wb_waddr), .wr_data(wb_wdata),
    .rd_en(buf_rd), .rd_addr(WB_AW'(wbase + kt[WB_AW-1:0])), .rd_data(wb_q)
  );

  // ---------------- input encoder ----------------
  logic                   ie_valid;
  logic [4:0]             ie_es;
  logic [TILE-1:0]        ie_sign, ie_flag;
  logic [TILE-1:0][LIN_M-1:0] ie_mant;
  bbfp_encoder #(.N(TILE), .M(LIN_M), .O(LIN_O), .EXT_MAX(1'b0)) u_in_enc (
    .clk, .rst_n, .in_valid(state == C_LOAD), .in_data(ib_q), .max_exp_in(5'd0),
    .out_valid(ie_valid), .out_es(ie_es), .out_sign(ie_sign), .out_flag(ie_flag),
    .out_mant(ie_mant)
  );

  // ---------------- PE array ----------------
  logic                         arr_in_valid, arr_out_valid;
  logic [ROWS-1:0]              arr_sign, arr_flag;
  logic [ROWS-1:0][LIN_M-1:0]   arr_mant;
  logic [5:0]                   arr_exp;
  logic [COLS-1:0][ACC_W-1:0]   arr_psum;

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      arr_sign[r] = ie_sign[int'(cnt) * ROWS + r];
      arr_flag[r] = ie_flag[int'(cnt) * ROWS + r];
      arr_mant[r] = ie_mant[int'(cnt) * ROWS + r];
    end
  end
  assign arr_in_valid = (state == C_FEED);

  pe_array #(.ROWS(ROWS), .COLS(COLS), .M(LIN_M), .O(LIN_O), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n,
    .w_load(state == C_LOAD), .w_exp(wb_q.exp), .w_sign(wb_q.sign), .w_flag(wb_q.flag),
    .w_mant(wb_q.mant),
    .in_valid(arr_in_valid), .a_exp(ie_es), .a_sign(arr_sign), .a_flag(arr_flag),
    .a_mant(arr_mant),
    .out_valid(arr_out_valid), .out_exp(arr_exp), .out_psum(arr_psum)
  );

  // ---------------- output buffer ----------------
  logic [OB_W-1:0] ob_q;
  logic            ob_rd, ob_rvalid;
  logic [2:0]      ob_rcnt, acc_row;
  sram_buf #(.WIDTH(OB_W), .DEPTH(T)) u_obuf (
    .clk, .wr_en(arr_out_valid), .wr_addr($clog2(T)'(ob_wcnt)), .wr_data({arr_exp, arr_psum}),
    .rd_en(ob_rd), .rd_addr($clog2(T)'(ob_rcnt)), .rd_data(ob_q)
  );

  // ---------------- FP encoders and FP adders ----------------
  logic [COLS-1:0][15:0] fe_out, fa_out;
  logic [15:0]           acc [T][COLS];
  logic signed [7:0]     fe_scale;
  assign fe_scale = 8'(ob_q[OB_W-1 -: 6]) - 8'(EBIAS2);
  for (genvar c = 0; c < COLS; c++) begin : g_fp
    fp_encoder #(.IN_W(ACC_W)) u_fpenc (
      .in_val(signed'(ob_q[c*ACC_W +: ACC_W])), .in_scale(fe_scale), .out_fp(fe_out[c])
    );
    fp_adder u_fpadd (.a(acc[acc_row[1:0]][c]), .b(fe_out[c]), .sum(fa_out[c]));
  end

  // ---------------- max unit ----------------
  logic [4:0]  mx_exp;
  logic [COLS-1:0][15:0] mx_in;
  always_comb for (int c = 0; c < COLS; c++) mx_in[c] = acc[cnt[1:0]][c];
  max_unit #(.LANES(COLS)) u_max (
    .clk, .rst_n, .in_valid(state == C_MAX), .in_first(cnt == 3'd0), .in_data(mx_in),
    .max_val(res_max), .max_exp(mx_exp)
  );

  // ---------------- data selector ----------------
  logic [OTILE-1:0][15:0] res_flat;
  always_comb
    for (int t = 0; t < T; t++)
      for (int c = 0; c < COLS; c++) res_flat[t*COLS + c] = acc[t][c];

  // to the nonlinear unit
  logic nl_in_valid, nl_in_ready;
  assign nl_in_valid = (state == C_SEL) && nl_en;
  nonlinear_unit #(.N(OTILE), .M(NL_M), .O(NL_O), .EXT_MAX(1'b1)) u_nl (
    .clk, .rst_n, .in_valid(nl_in_valid), .in_ready(nl_in_ready), .in_op(nl_op),
    .in_data(res_flat), .in_max_exp(mx_exp), .in_max(res_max), .out_valid(nl_out_valid), .out_data(nl_out_data),
    .mem_req, .mem_addr, .mem_ready, .mem_rvalid, .mem_rdata
  );

  // to the output encoder
  bbfp_encoder #(.N(OTILE), .M(LIN_M), .O(LIN_O), .EXT_MAX(1'b1)) u_out_enc (
    .clk, .rst_n, .in_valid((state == C_SEL) && !nl_en), .in_data(res_flat),
    .max_exp_in(mx_exp),
    .out_valid(enc_out_valid), .out_es(enc_out.es), .out_sign(enc_out.sign),
    .out_flag(enc_out.flag), .out_mant(enc_out.mant)
  );

  // ---------------- control unit ----------------
  assign cmd_ready = (state == C_IDLE);
  assign buf_rd    = (state == C_RD);
  assign ob_rd     = (state == C_ACC) && (ob_rcnt < 3'(T));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= C_IDLE;
      ibase   <= '0; wbase <= '0; ktiles <= '0; kt <= '0;
      nl_en   <= 1'b0; nl_op <= NL_SOFTMAX;
      cnt     <= '0; ob_wcnt <= '0; ob_rcnt <= '0; acc_row <= '0; ob_rvalid <= 1'b0;
      done    <= 1'b0;
      for (int t = 0; t < T; t++)
        for (int c = 0; c < COLS; c++) acc[t][c] <= '0;
    end else begin
      done      <= 1'b0;
      ob_rvalid <= ob_rd;
      if (arr_out_valid) ob_wcnt <= ob_wcnt + 3'd1;
      unique case (state)
        C_IDLE: if (cmd_valid) begin
          ibase  <= cmd_ibase;  wbase <= cmd_wbase;
          ktiles <= (cmd_ktiles == '0) ? (IB_AW+1)'(1) : cmd_ktiles;
          nl_en  <= cmd_nl_en;  nl_op <= cmd_nl_op;
          kt     <= '0;
          state  <= C_RD;
        end
        C_RD:   state <= C_LOAD;
        C_LOAD: begin cnt <= '0; ob_wcnt <= '0; state <= C_FEED; end
        C_FEED: begin
          cnt <= cnt + 3'd1;
          if (cnt == 3'(T - 1)) state <= C_DRAIN;
        end
        C_DRAIN: if (ob_wcnt == 3'(T)) begin
          ob_rcnt <= '0; acc_row <= '0; state <= C_ACC;
        end
        C_ACC: begin
          if (ob_rd) ob_rcnt <= ob_rcnt + 3'd1;
          if (ob_rvalid) begin
            for (int c = 0; c < COLS; c++)
              acc[acc_row[1:0]][c] <= (kt == '0) ? fe_out[c] : fa_out[c];
            acc_row <= acc_row + 3'd1;
            if (acc_row == 3'(T - 1)) begin
              kt <= kt + 1'b1;
              if (kt + 1'b1 == ktiles) begin
                cnt <= '0; state <= C_MAX;
              end else begin
                state <= C_RD;
              end
            end
          end
        end
        C_MAX: begin
          cnt <= cnt + 3'd1;
          if (cnt == 3'(T - 1)) state <= C_SEL;
        end
        C_SEL: state <= nl_en ? C_NLWAIT : C_ENC;
        C_NLWAIT: if (nl_out_valid) begin done <= 1'b1; state <= C_IDLE; end
        C_ENC: begin done <= 1'b1; state <= C_IDLE; end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule

// bbfp_encoder: converts a block of N FP16 numbers into one BBFP(M,O) block.
//
// The shared exponent is Max(E) - (M-O) (clamped at 0), the alignment rule
// the paper proposes. An element whose exponent is above the shared one
// gets flag=1 and its significand is shifted left by the difference; the
// others get flag=0 and are shifted right. The shifted 11-bit significand
// is then truncated to M bits: flag=0 keeps the M bits starting at the
// hidden-one position, flag=1 keeps the M bits starting (M-O) positions
// higher, so the two windows overlap by O bits (for BBFP(4,2) these are
// the paper's bits 11..8 and 13..10, counted from 1). Truncation, not
// rounding, as in the paper.
//
// With EXT_MAX=1 the block's maximum exponent comes from the max_exp_in
// port instead of an internal comparator tree; the output encoder of the
// accelerator uses this to reuse the result of the max unit.
//
// Own choices: subnormals are encoded with exponent 1 and no hidden one;
// Inf/NaN are not treated specially. One register stage: out_* is valid
// the cycle after in_valid.
module bbfp_encoder #(
  parameter int unsigned N       = 16,
  parameter int unsigned M       = 6,
  parameter int unsigned O       = 3,
  parameter bit          EXT_MAX = 1'b0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [N-1:0][15:0]      in_data,
  input  logic [4:0]              max_exp_in,
  output logic                    out_valid,
  output logic [4:0]              out_es,
  output logic [N-1:0]            out_sign,
  output logic [N-1:0]            out_flag,
  output logic [N-1:0][M-1:0]     out_mant
);
  localparam int unsigned SH = M - O;          // left shift range / high-window offset
  localparam int unsigned WW = 11 + SH;        // width of a left-shifted significand

  logic [4:0]          e_eff [N];
  logic [10:0]         sig   [N];
  logic [4:0]          max_e, es;
  logic [N-1:0]        c_flag;
  logic [N-1:0][M-1:0] c_mant;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      e_eff[i] = (in_data[i][14:10] == 5'd0) ? 5'd1 : in_data[i][14:10];
      sig[i]   = {(in_data[i][14:10] != 5'd0), in_data[i][9:0]};
    end
    if (EXT_MAX) begin
      max_e = (max_exp_in == 5'd0) ? 5'd1 : max_exp_in;
    end else begin
      max_e = 5'd1;
      for (int i = 0; i < N; i++)
        if (e_eff[i] > max_e) max_e = e_eff[i];
    end
    es = (max_e > 5'(SH)) ? max_e - 5'(SH) : 5'd0;
    for (int i = 0; i < N; i++) begin
      logic [WW-1:0] wl;
      logic [10:0]   wr;
      wl = '0;
      wr = '0;
      if (e_eff[i] > es) begin
        c_flag[i] = 1'b1;
        wl        = WW'(sig[i]) << (e_eff[i] - es);
        c_mant[i] = wl[WW-1 -: M];
      end else begin
        c_flag[i] = 1'b0;
        wr        = sig[i] >> (es - e_eff[i]);
        c_mant[i] = wr[10 -: M];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_es    <= '0;
      out_sign  <= '0;
      out_flag  <= '0;
      out_mant  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_es <= es;
        for (int i = 0; i < N; i++) out_sign[i] <= in_data[i][15];
        out_flag <= c_flag;
        out_mant <= c_mant;
      end
    end
  end
endmodule

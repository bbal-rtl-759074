// pe_array: ROWS x COLS weight-stationary systolic array of BBFP PEs
// (paper Fig. 7; 4x4 in the paper).
//
// A weight tile (one BBFP block: exponent plus ROWS x COLS elements, row r
// = input index, column c = output index) is preloaded in one cycle with
// w_load. Activation vectors (ROWS elements of one BBFP block, exponent
// a_exp) then enter one per cycle. Inside, row r is delayed r cycles
// (input skew), activations move right and partial sums move down, so the
// bottom of column c yields sum_r a[r]*w[r][c] as an ACC_W-bit integer.
// Output registers undo the skew, so out_psum holds a whole vector of COLS
// results. out_exp is the sum of the two shared exponents, produced by the
// single PE (0,0) of type (1) and carried down column 0 through the
// exponent bypass of the type (2) PEs; all PEs in other columns are type
// (2) too, and their bypass inputs are tied to zero.
// Timing: a vector presented with in_valid in cycle k appears with
// out_valid in cycle k+LAT, LAT = ROWS+COLS-1 (7 for 4x4); one vector per
// cycle may follow. A new a_exp or weight tile
// may be used only after the previous tile has drained (own choice, the
// exponent is held in one register).
module pe_array #(
  parameter int unsigned ROWS  = 4,
  parameter int unsigned COLS  = 4,
  parameter int unsigned M     = 6,
  parameter int unsigned O     = 3,
  parameter int unsigned ACC_W = 21
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              w_load,
  input  logic [4:0]                        w_exp,
  input  logic [ROWS-1:0][COLS-1:0]         w_sign,
  input  logic [ROWS-1:0][COLS-1:0]         w_flag,
  input  logic [ROWS-1:0][COLS-1:0][M-1:0]  w_mant,
  input  logic                              in_valid,
  input  logic [4:0]                        a_exp,
  input  logic [ROWS-1:0]                   a_sign,
  input  logic [ROWS-1:0]                   a_flag,
  input  logic [ROWS-1:0][M-1:0]            a_mant,
  output logic                              out_valid,
  output logic [5:0]                        out_exp,
  output logic [COLS-1:0][ACC_W-1:0]        out_psum
);
  localparam int unsigned LAT = ROWS + COLS - 1;

  // horizontal activation wires: column index 0..COLS (COLS = past the edge)
  logic                 hv [ROWS][COLS+1];
  logic                 hs [ROWS][COLS+1];
  logic                 hf [ROWS][COLS+1];
  logic [M-1:0]         hm [ROWS][COLS+1];
  // vertical wires: row index 0..ROWS
  logic signed [ACC_W-1:0] vp [ROWS+1][COLS];

  // input skew: row r delayed by r cycles
  for (genvar r = 0; r < ROWS; r++) begin : g_skew
    if (r == 0) begin : g_direct
      assign hv[0][0] = in_valid;
      assign hs[0][0] = a_sign[0];
      assign hf[0][0] = a_flag[0];
      assign hm[0][0] = a_mant[0];
    end else begin : g_delay
      logic [M+2:0] sr [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < r; k++) sr[k] <= '0;
        end else begin
          sr[0] <= {in_valid, a_sign[r], a_flag[r], a_mant[r]};
          for (int k = 1; k < r; k++) sr[k] <= sr[k-1];
        end
      end
      assign {hv[r][0], hs[r][0], hf[r][0], hm[r][0]} = sr[r-1];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign vp[0][c] = '0;
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic [5:0] ve [ROWS+1];   // exponent wires of this column
    assign ve[0] = '0;
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      pe #(.M(M), .O(O), .ACC_W(ACC_W), .EXP_ADD(r == 0 && c == 0)) u_pe (
        .clk, .rst_n,
        .w_load, .w_sign(w_sign[r][c]), .w_flag(w_flag[r][c]), .w_mant(w_mant[r][c]),
        .w_exp,
        .a_valid_in(hv[r][c]), .a_sign_in(hs[r][c]), .a_flag_in(hf[r][c]),
        .a_mant_in(hm[r][c]), .a_exp_in(a_exp),
        .a_valid_out(hv[r][c+1]), .a_sign_out(hs[r][c+1]), .a_flag_out(hf[r][c+1]),
        .a_mant_out(hm[r][c+1]),
        .psum_in(vp[r][c]), .psum_out(vp[r+1][c]),
        .exp_in(ve[r]), .exp_out(ve[r+1])
      );
    end
  end

  // output deskew: column c delayed by COLS-1-c more cycles
  for (genvar c = 0; c < COLS; c++) begin : g_deskew
    if (c == COLS - 1) begin : g_direct
      assign out_psum[c] = vp[ROWS][c];
    end else begin : g_delay
      logic [ACC_W-1:0] dr [COLS-1-c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < COLS - 1 - c; k++) dr[k] <= '0;
        end else begin
          dr[0] <= vp[ROWS][c];
          for (int k = 1; k < COLS - 1 - c; k++) dr[k] <= dr[k-1];
        end
      end
      assign out_psum[c] = dr[COLS-2-c];
    end
  end

  // valid pipeline
  logic [LAT-1:0] vsr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vsr <= '0;
    else        vsr <= {vsr[LAT-2:0], in_valid};
  end
  assign out_valid = vsr[LAT-1];
  assign out_exp   = g_col[0].ve[ROWS];
endmodule

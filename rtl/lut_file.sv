// lut_file: the LUT File of the nonlinear unit (paper Fig. 6, step 3;
// Sec. IV-B "Segment Lookup Table").
//
// Holds one sub-table of 2^AW entries (128 for the paper's 7-bit address,
// 0x00..0x7F in Fig. 6) plus the shared exponent of its values. Entries are
// BBFP elements {sign, flag, mant}, so a looked-up value stays in BBFP for
// the next step, as the paper describes. The DMA writes it; N lanes read it
// in parallel (one read port per lane, own choice so that a whole vector is
// looked up in one cycle). Registered read: rd_data valid the cycle after
// rd_en.
module lut_file #(
  parameter int unsigned N  = 16,
  parameter int unsigned AW = 7,
  parameter int unsigned DW = 12
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [DW-1:0]        wr_data,
  input  logic                 hdr_we,
  input  logic [4:0]           hdr_exp,
  input  logic                 rd_en,
  input  logic [N-1:0][AW-1:0] rd_addr,
  output logic [N-1:0][DW-1:0] rd_data,
  output logic [4:0]           lut_exp
);
  logic [DW-1:0] mem [1 << AW];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en)
      for (int i = 0; i < N; i++) rd_data[i] <= mem[rd_addr[i]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      lut_exp <= '0;
    else if (hdr_we) lut_exp <= hdr_exp;
  end
endmodule

// nl_dma: the DMA of the nonlinear unit (paper Fig. 6, step 2, "Value Load").
//
// Once the Align unit has found a block's shared exponent, the DMA fetches
// the matching sub-table from external memory into the LUT file, while the
// SUB unit works, which hides the load time. Memory layout (own choice):
// word address {function[1:0], exponent[4:0], index[7:0]}; word 0 is a
// header whose low 5 bits are the exponent of the table's values; words
// 1..2^LUT_AW are the entries, in the low LUT_DW bits.
// Memory port: a request is taken when mem_req and mem_ready are both high;
// read data return in order with mem_rvalid, any number of cycles later.
// done rises the cycle after the last word is written and stays high until
// the next start. lut_wdata and hdr_exp are the memory read data itself:
// the DMA only generates addresses and write strobes, the data need no
// conversion because the tables are stored already encoded.
module nl_dma #(
  parameter int unsigned LUT_AW = 7,
  parameter int unsigned LUT_DW = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [1:0]        fn,
  input  logic [4:0]        exp_sel,
  output logic              done,
  // external memory
  output logic              mem_req,
  output logic [14:0]       mem_addr,
  input  logic              mem_ready,
  input  logic              mem_rvalid,
  input  logic [15:0]       mem_rdata,
  // LUT file write side
  output logic              lut_we,
  output logic [LUT_AW-1:0] lut_waddr,
  output logic [LUT_DW-1:0] lut_wdata,
  output logic              hdr_we,
  output logic [4:0]        hdr_exp
);
  localparam int unsigned WORDS = (1 << LUT_AW) + 1;

  logic       busy;
  logic [6:0] base;
  logic [8:0] issued, received;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      base     <= '0;
      issued   <= '0;
      received <= '0;
    end else if (start) begin
      busy     <= 1'b1;
      done     <= 1'b0;
      base     <= {fn, exp_sel};
      issued   <= '0;
      received <= '0;
    end else if (busy) begin
      if (mem_req && mem_ready) issued <= issued + 9'd1;
      if (mem_rvalid) begin
        received <= received + 9'd1;
        if (received == 9'(WORDS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign mem_req   = busy && (issued < 9'(WORDS));
  assign mem_addr  = {base, 8'(issued)};
  assign hdr_we    = busy && mem_rvalid && (received == 9'd0);
  assign hdr_exp   = mem_rdata[4:0];
  assign lut_we    = busy && mem_rvalid && (received != 9'd0);
  assign lut_waddr = LUT_AW'(received - 9'd1);
  assign lut_wdata = mem_rdata[LUT_DW-1:0];
endmodule

// sram_buf: on-chip buffer with one write and one read port (used for the
// input, weight and output buffers of Fig. 7). Written as an array so that
// synthesis can map it to an SRAM macro. The paper names the buffers but
// gives neither sizes nor ports: a synchronous write, a registered read
// (data valid the cycle after rd_en) and the depths chosen by the
// instantiating module are this design's own.
module sram_buf #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule

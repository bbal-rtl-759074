// tb_nl_dma: the DMA must fetch the 129 words of the sub-table selected by
// {function, exponent} through a memory with latency and random stalls,
// write the header and the 128 entries to the right LUT addresses, and
// raise done. Several loads with different selections back to back.
module tb_nl_dma;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done, mem_req, mem_ready, mem_rvalid, lut_we, hdr_we;
  logic [1:0] fn; logic [4:0] exp_sel, hdr_exp;
  logic [14:0] mem_addr; logic [15:0] mem_rdata;
  logic [6:0] lut_waddr; logic [11:0] lut_wdata;
  nl_dma dut (.*);
  // memory: word = address hash, latency 2, random stalls
  logic [15:0] p0, p1; logic v0, v1;
  function automatic logic [15:0] hashw(input logic [14:0] a);
    return 16'(a * 37 + 11) ^ {1'b0, a};
  endfunction
  always @(posedge clk) begin
    v0 <= mem_req && mem_ready; p0 <= hashw(mem_addr);
    v1 <= v0; p1 <= p0;
    mem_ready <= ($urandom % 3 != 0);
  end
  assign mem_rvalid = v1;
  assign mem_rdata  = p1;
  int nwr, nhdr;
  logic [6:0] base;
  always @(posedge clk) if (rst_n) begin
    if (lut_we) begin
      nwr++;
      checks++;
      if (lut_wdata != hashw({base, 8'(int'(lut_waddr) + 1)}) % 4096) begin
        failures++; if (failures < 5) $display("FAIL entry %0d", lut_waddr);
      end
    end
    if (hdr_we) begin
      nhdr++;
      checks++;
      if (hdr_exp != hashw({base, 8'd0}) % 32) begin failures++; $display("FAIL header"); end
    end
  end
  initial begin
    start = 0; fn = 0; exp_sel = 0; v0 = 0; v1 = 0; mem_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int cyc;
      @(negedge clk);
      start = 1; fn = 2'($urandom % 3); exp_sel = 5'($urandom); base = {fn, exp_sel};
      nwr = 0; nhdr = 0;
      @(negedge clk); start = 0;
      cyc = 0;
      while (!done && cyc < 2000) begin @(negedge clk); cyc++; end
      checks += 2;
      if (!done) begin failures++; $display("FAIL: no done"); end
      if (nwr != 128 || nhdr != 1) begin failures++; $display("FAIL: %0d entries %0d headers", nwr, nhdr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

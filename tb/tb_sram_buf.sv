// tb_sram_buf: writes random words to random addresses of a 64 x 133-bit
// buffer, mixed with reads; every read must return the last word written
// there, one cycle after rd_en.
module tb_sram_buf;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en;
  logic [5:0] wr_addr, rd_addr;
  logic [132:0] wr_data, rd_data;
  logic [132:0] model [64];
  bit written [64];
  sram_buf #(.WIDTH(133), .DEPTH(64)) dut (.*);
  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int t = 0; t < 5000; t++) begin
      logic [132:0] expd;
      bit chkit;
      @(negedge clk);
      wr_en = ($urandom % 2); wr_addr = 6'($urandom);
      wr_data = {5'($urandom), 32'($urandom), 32'($urandom), 32'($urandom), 32'($urandom)};
      rd_en = ($urandom % 2); rd_addr = 6'($urandom);
      chkit = rd_en && written[rd_addr] && !(wr_en && wr_addr == rd_addr);
      expd = model[rd_addr];
      if (wr_en) begin model[wr_addr] = wr_data; written[wr_addr] = 1; end
      @(posedge clk); #1;
      if (chkit) begin
        checks++;
        if (rd_data !== expd) begin failures++; if (failures < 5) $display("FAIL addr %0d", rd_addr); end
      end
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

// tb_lut_file: fills the 128-entry LUT with random entries and a header
// exponent, then checks 16 parallel random reads one cycle after rd_en.
module tb_lut_file;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, hdr_we, rd_en;
  logic [6:0] wr_addr;
  logic [11:0] wr_data;
  logic [4:0] hdr_exp, lut_exp;
  logic [15:0][6:0] rd_addr;
  logic [15:0][11:0] rd_data;
  logic [11:0] model [128];
  lut_file dut (.*);
  initial begin
    wr_en = 0; hdr_we = 0; rd_en = 0; wr_addr = 0; wr_data = 0; hdr_exp = 0; rd_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int i = 0; i < 128; i++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 7'(i); wr_data = 12'($urandom); model[i] = wr_data;
        hdr_we = (i == 0); hdr_exp = 5'($urandom);
        if (i == 0) begin
          @(posedge clk); #1;
          checks++;
          if (lut_exp != hdr_exp) begin failures++; $display("FAIL header"); end
        end
      end
      @(negedge clk); wr_en = 0; hdr_we = 0;
      for (int t = 0; t < 200; t++) begin
        @(negedge clk);
        rd_en = 1;
        for (int l = 0; l < 16; l++) rd_addr[l] = 7'($urandom);
        @(posedge clk); #1;
        for (int l = 0; l < 16; l++) begin
          checks++;
          if (rd_data[l] != model[rd_addr[l]]) begin failures++; if (failures < 5) $display("FAIL lane %0d", l); end
        end
        rd_en = 0;
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

// tb_max_unit: random vectors of 4 beats x 4 FP16 lanes; after the last beat
// the unit must hold the largest value (compared as reals) and the largest
// exponent field; in_first must restart the search.
module tb_max_unit;
  import bbal_tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_first;
  logic [3:0][15:0] in_data;
  logic [15:0] max_val;
  logic [4:0] max_exp;
  max_unit #(.LANES(4)) dut (.*);
  initial begin
    in_valid = 0; in_first = 0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      real best;
      int be;
      best = -1.0e9; be = 0;
      for (int k = 0; k < 4; k++) begin
        @(negedge clk);
        in_valid = 1; in_first = (k == 0);
        for (int i = 0; i < 4; i++) begin
          in_data[i] = rand_fp16(0, (t % 2) ? 30 : 12);
          if (t % 5 == 0) in_data[i][15] = 1'b1;     // all negative blocks
          if (fp16_to_real(in_data[i]) > best) best = fp16_to_real(in_data[i]);
          if (int'(in_data[i][14:10]) > be) be = int'(in_data[i][14:10]);
        end
      end
      @(negedge clk); in_valid = 0;
      checks += 2;
      if (fp16_to_real(max_val) != best) begin failures++; $display("FAIL max %h", max_val); end
      if (int'(max_exp) != be) begin failures++; $display("FAIL exp %0d exp %0d", max_exp, be); end
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

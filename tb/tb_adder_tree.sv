// tb_adder_tree: sums of 16 random signed 16-bit values, including all
// maximal and all minimal inputs (no overflow allowed).
module tb_adder_tree;
  int checks = 0, failures = 0;
  logic signed [15:0] in_val [16];
  logic signed [19:0] sum;
  adder_tree dut (.*);
  initial begin
    for (int t = 0; t < 5000; t++) begin
      int s;
      s = 0;
      for (int i = 0; i < 16; i++) begin
        in_val[i] = 16'($urandom);
        if (t == 0) in_val[i] = 16'sh7FFF;
        if (t == 1) in_val[i] = -16'sh8000;
        s += int'(in_val[i]);
      end
      #1;
      checks++;
      if (int'(sum) != s) begin failures++; if (failures < 5) $display("FAIL got %0d exp %0d", sum, s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

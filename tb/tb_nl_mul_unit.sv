// tb_nl_mul_unit: 16 lanes of signed 16 x 16 products.
module tb_nl_mul_unit;
  int checks = 0, failures = 0;
  logic signed [15:0] a [16], b [16];
  logic signed [31:0] p [16];
  nl_mul_unit dut (.*);
  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < 16; i++) begin a[i] = 16'($urandom); b[i] = 16'($urandom); end
      #1;
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (longint'(p[i]) != longint'(a[i]) * longint'(b[i])) begin
          failures++; if (failures < 5) $display("FAIL %0d*%0d got %0d", a[i], b[i], p[i]);
        end
      end
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

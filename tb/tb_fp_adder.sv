// tb_fp_adder: FP16 + FP16 checked against the exact real sum truncated to
// FP16 (towards zero), with operands of close and distant exponents,
// subnormals, cancellation and overflow.
module tb_fp_adder;
  import bbal_tb_pkg::*;
  int checks = 0, failures = 0;
  logic [15:0] a, b, sum;
  fp_adder dut (.*);
  initial begin
    for (int t = 0; t < 50000; t++) begin
      logic [15:0] e;
      a = rand_fp16(0, 30);
      b = (t % 2) ? rand_fp16(0, 30) : {~a[15], a[14:10], 10'($urandom)};  // near-cancellation
      if (t % 7 == 0) b = {1'($urandom), a[14:10] - 5'($urandom % 3), 10'($urandom)};
      #1;
      e = real_to_fp16(fp16_to_real(a) + fp16_to_real(b));
      checks++;
      if (sum !== e) begin
        failures++;
        if (failures < 8) $display("FAIL %h + %h got %h exp %h", a, b, sum, e);
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

// tb_fp_encoder: fixed point * 2^scale -> FP16, checked against a
// real-number conversion with truncation towards zero, covering normal,
// subnormal, zero and saturating results.
module tb_fp_encoder;
  import bbal_tb_pkg::*;
  int checks = 0, failures = 0;
  logic signed [20:0] in_val;
  logic signed [7:0]  in_scale;
  logic [15:0] out_fp;
  fp_encoder #(.IN_W(21)) dut (.*);
  int nsub = 0, nsat = 0;
  initial begin
    for (int t = 0; t < 50000; t++) begin
      logic [15:0] e;
      in_val = 21'($urandom);
      if (t % 3 == 0) in_val = in_val >>> ($urandom % 20);
      if (t % 1000 == 0) in_val = '0;
      in_scale = 8'(int'($urandom % 80) - 50);
      #1;
      e = real_to_fp16(real'(in_val) * pow2(int'(in_scale)));
      if (e[14:10] == 0 && e != 0) nsub++;
      if (e[14:0] == 15'h7BFF) nsat++;
      checks++;
      if (out_fp !== e) begin
        failures++;
        if (failures < 8) $display("FAIL val=%0d sc=%0d got %h exp %h", in_val, in_scale, out_fp, e);
      end
    end
    checks++;
    if (nsub == 0 || nsat == 0) begin failures++; $display("FAIL: corner cases not reached"); end
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

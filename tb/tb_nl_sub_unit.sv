// tb_nl_sub_unit: x - max in the shared-exponent integer domain, put back
// into BBFP(10,5) form: the represented value must equal the difference
// truncated to the mantissa group (saturating when too large).
module tb_nl_sub_unit;
  int checks = 0, failures = 0;
  logic signed [15:0] in_val [16];
  logic signed [15:0] in_max;
  logic [15:0] out_sign, out_flag;
  logic [15:0][9:0] out_mant;
  nl_sub_unit dut (.*);
  int n0 = 0, n1 = 0, nsat = 0;
  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < 16; i++) in_val[i] = 16'($urandom);
      if (t % 3 == 0) for (int i = 0; i < 16; i++) in_val[i] = 16'(int'($urandom % 2000) - 1000);
      in_max = 16'($urandom);
      #1;
      for (int i = 0; i < 16; i++) begin
        int d, a, expf, expm;
        d = int'(in_val[i]) - int'(in_max);
        a = (d < 0) ? -d : d;
        if (a < 1024) begin expf = 0; expm = a; n0++; end
        else if (a / 32 < 1024) begin expf = 1; expm = a / 32; n1++; end
        else begin expf = 1; expm = 1023; nsat++; end
        checks++;
        if (out_sign[i] != (d < 0) || int'(out_flag[i]) != expf || int'(out_mant[i]) != expm) begin
          failures++;
          if (failures < 8) $display("FAIL d=%0d got %0d %0d %0d", d, out_sign[i], out_flag[i], out_mant[i]);
        end
      end
    end
    checks++;
    if (n0 == 0 || n1 == 0 || nsat == 0) begin failures++; $display("FAIL: cases not reached"); end
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

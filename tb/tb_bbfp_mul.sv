// tb_bbfp_mul: exhaustive check of the BBFP(6,3) element multiplier. The
// compressed product (2-bit flag, sign, 12-bit mantissa) is expanded with
// the paper's rule (shift 0, m-o or 2(m-o) by the flags) and compared with
// the product of the two element values.
module tb_bbfp_mul;
  import bbal_tb_pkg::*;
  int checks = 0, failures = 0;
  logic a_sign, a_flag, b_sign, b_flag, p_sign;
  logic [5:0] a_mant, b_mant;
  logic [1:0] p_flag;
  logic [11:0] p_mant;
  bbfp_mul #(.M(6), .O(3)) dut (.*);
  initial begin
    for (int a = 0; a < 256; a++)
      for (int b = 0; b < 256; b++) begin
        real va, vb, vp;
        {a_sign, a_flag, a_mant} = 8'(a);
        {b_sign, b_flag, b_mant} = 8'(b);
        #1;
        va = bbfp_real(a_sign, a_flag, int'(a_mant), 15, 6, 3);
        vb = bbfp_real(b_sign, b_flag, int'(b_mant), 15, 6, 3);
        vp = real'(p_mant) * pow2(3 * (int'(p_flag[1]) + int'(p_flag[0]))) * pow2(-10);
        if (p_sign) vp = -vp;
        checks++;
        if (vp != va * vb || (p_flag != {a_flag, b_flag})) begin
          failures++;
          if (failures < 5) $display("FAIL a=%h b=%h got %f exp %f", a, b, vp, va * vb);
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

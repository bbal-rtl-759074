// tb_div_unit: 16 lanes of signed 32-bit division, checked through the
// division identity num = q*den + r with |r| < |den| and r of the sign of
// num (truncation towards zero); zero divisors must give zero.
module tb_div_unit;
  int checks = 0, failures = 0;
  logic signed [31:0] num [16], den [16], quo [16];
  div_unit dut (.*);
  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < 16; i++) begin
        num[i] = 32'($urandom);
        den[i] = 32'($urandom) >>> ($urandom % 31);
        if ($urandom % 50 == 0) den[i] = 0;
      end
      #1;
      for (int i = 0; i < 16; i++) begin
        longint r, n, d, q;
        bit ok;
        n = num[i]; d = den[i]; q = quo[i];
        if (d == 0) ok = (q == 0);
        else begin
          r  = n - q * d;
          ok = ((r < 0 ? -r : r) < (d < 0 ? -d : d)) && (r == 0 || ((r < 0) == (n < 0)));
        end
        checks++;
        if (!ok) begin failures++; if (failures < 5) $display("FAIL %0d/%0d got %0d", n, d, q); end
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

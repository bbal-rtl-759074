// tb_nl_align: the Align Exponent unit must produce the BBFP(10,5) block
// of the real-number model, the integer value of each element and the
// block maximum (the element with the largest real value). A second
// instance with EXT_MAX=1 gets the largest exponent field and the largest
// FP16 value from the testbench, as the accelerator's max unit would
// supply them, and must give exactly the same outputs.
module tb_nl_align;
  import bbal_tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [15:0][15:0] in_data;
  logic [4:0] out_es;
  logic [15:0] out_sign, out_flag;
  logic [15:0][9:0] out_mant;
  logic signed [15:0] out_val [16];
  logic signed [15:0] out_max;
  logic [4:0] max_exp_in;
  logic [15:0] max_in;
  nl_align dut (.*);
  logic x_valid;
  logic [4:0] x_es;
  logic [15:0] x_sign, x_flag;
  logic [15:0][9:0] x_mant;
  logic signed [15:0] x_val [16];
  logic signed [15:0] x_max;
  nl_align #(.EXT_MAX(1'b1)) dut_x (
    .clk, .rst_n, .in_valid, .in_data, .max_exp_in, .max_in,
    .out_valid(x_valid), .out_es(x_es), .out_sign(x_sign), .out_flag(x_flag),
    .out_mant(x_mant), .out_val(x_val), .out_max(x_max)
  );
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL: %s", what); end
  endtask
  initial begin
    in_valid = 0; in_data = '0; max_exp_in = '0; max_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      logic [15:0] x [];
      int es, mr;
      logic fr;
      real best;
      x = new[16];
      @(negedge clk);
      for (int i = 0; i < 16; i++) begin in_data[i] = rand_fp16(8, 20); x[i] = in_data[i]; end
      max_exp_in = 0; max_in = x[0];
      for (int i = 0; i < 16; i++) begin
        if (x[i][14:10] > max_exp_in) max_exp_in = x[i][14:10];
        if (fp16_to_real(x[i]) > fp16_to_real(max_in)) max_in = x[i];
      end
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      chk(out_valid, "valid after one cycle");
      es = ref_es(x, 10, 5);
      chk(int'(out_es) == es, "shared exponent");
      best = -1.0e9;
      for (int i = 0; i < 16; i++) begin
        real v;
        ref_elem(x[i], es, 10, 5, fr, mr);
        v = bbfp_real(x[i][15], fr, mr, es, 10, 5);
        if (v > best) best = v;
        chk(out_flag[i] == fr && int'(out_mant[i]) == mr && out_sign[i] == x[i][15], "element");
        chk(real'(out_val[i]) * pow2(es - 24) == v, $sformatf("value %0d", i));
      end
      chk(real'(out_max) * pow2(es - 24) == best, "max");
      chk(x_valid && x_es == out_es && x_sign == out_sign && x_flag == out_flag && x_mant == out_mant,
          "external-max instance: block");
      chk(real'(x_max) * pow2(es - 24) == best, "external-max instance: max");
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

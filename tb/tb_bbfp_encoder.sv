// tb_bbfp_encoder: checks FP16 -> BBFP(6,3) and BBFP(10,5) encoding
// against a real-number model (shared exponent Max-(m-o), flags, truncated
// mantissas), the externally supplied max exponent, and the one-cycle
// latency. Also replays the worked example of the paper's figure for
// BBFP(4,2): mantissa 1.010.. two above the shared exponent -> flag 1,
// 1010; mantissa 1.001.. two below -> flag 0, 0010.
module tb_bbfp_encoder;
  import bbal_tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N = 16;
  logic in_valid;
  logic [N-1:0][15:0] in_data;
  logic [4:0] max_exp_in;
  logic v6, v10, vx, v4;
  logic [4:0] es6, es10, esx, es4;
  logic [N-1:0] s6, f6, s10, f10, sx, fx, s4, f4;
  logic [N-1:0][5:0] m6, mx;
  logic [N-1:0][9:0] m10;
  logic [N-1:0][3:0] m4;

  bbfp_encoder #(.N(N), .M(6),  .O(3)) dut6  (.clk, .rst_n, .in_valid, .in_data, .max_exp_in,
    .out_valid(v6), .out_es(es6), .out_sign(s6), .out_flag(f6), .out_mant(m6));
  bbfp_encoder #(.N(N), .M(10), .O(5)) dut10 (.clk, .rst_n, .in_valid, .in_data, .max_exp_in,
    .out_valid(v10), .out_es(es10), .out_sign(s10), .out_flag(f10), .out_mant(m10));
  bbfp_encoder #(.N(N), .M(6),  .O(3), .EXT_MAX(1'b1)) dutx (.clk, .rst_n, .in_valid, .in_data,
    .max_exp_in, .out_valid(vx), .out_es(esx), .out_sign(sx), .out_flag(fx), .out_mant(mx));
  bbfp_encoder #(.N(N), .M(4),  .O(2)) dut4  (.clk, .rst_n, .in_valid, .in_data, .max_exp_in,
    .out_valid(v4), .out_es(es4), .out_sign(s4), .out_flag(f4), .out_mant(m4));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_block(input int m, input int o, input logic [4:0] es,
                             input logic [N-1:0] s, input logic [N-1:0] f,
                             input int mant [N]);
    logic [15:0] x [];
    int e_ref, mr;
    logic fr;
    x = new[N];
    for (int i = 0; i < N; i++) x[i] = in_data[i];
    e_ref = ref_es(x, m, o);
    chk(int'(es) == e_ref, $sformatf("M=%0d es %0d exp %0d", m, es, e_ref));
    for (int i = 0; i < N; i++) begin
      ref_elem(x[i], e_ref, m, o, fr, mr);
      chk(s[i] == x[i][15] && f[i] == fr && mant[i] == mr,
          $sformatf("M=%0d elem %0d x=%h got s%0d f%0d m%0d exp f%0d m%0d",
                    m, i, x[i], s[i], f[i], mant[i], fr, mr));
    end
  endtask

  int mm [N];
  int nflag1 = 0, nflag0 = 0;
  initial begin
    in_valid = 0; in_data = '0; max_exp_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // paper figure example, BBFP(4,2): exponents 19 and 17 with max 21
    @(negedge clk);
    in_data = '0;
    in_data[0] = {1'b1, 5'd21, 10'b0000000000};
    in_data[1] = {1'b1, 5'd21, 10'b0100000000};   // 1.01 at the max exponent
    in_data[2] = {1'b1, 5'd17, 10'b0010000000};   // 1.001, two below es=19
    in_valid = 1;
    @(posedge clk); #1;
    chk(v4 == 1'b1, "latency: out_valid one cycle after in_valid");
    chk(es4 == 5'd19, "figure example shared exponent 10011");
    chk(f4[1] == 1'b1 && m4[1] == 4'b1010, "figure example high mantissa 1010");
    chk(f4[2] == 1'b0 && m4[2] == 4'b0010, "figure example low mantissa 0010");
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    chk(v6 == 1'b0, "out_valid drops");
    // random blocks, spread of exponents inside the block
    for (int t = 0; t < 300; t++) begin
      automatic int base = 1 + int'($urandom % 28);
      automatic int spread = int'($urandom % 8);
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        automatic int lo = (base - spread < 0) ? 0 : base - spread;
        in_data[i] = rand_fp16(lo, base);
        if ($urandom % 10 == 0) in_data[i] = 16'h0000;
      end
      max_exp_in = 5'(base);
      begin
        automatic int mxe = 0;
        for (int i = 0; i < N; i++) if (int'(in_data[i][14:10]) > mxe) mxe = int'(in_data[i][14:10]);
        max_exp_in = 5'(mxe);
      end
      in_valid = 1;
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) mm[i] = int'(m6[i]);
      check_block(6, 3, es6, s6, f6, mm);
      for (int i = 0; i < N; i++) mm[i] = int'(m10[i]);
      check_block(10, 5, es10, s10, f10, mm);
      chk(esx == es6 && fx == f6 && mx == m6 && sx == s6, "external max equals internal max");
      for (int i = 0; i < N; i++) if (f6[i]) nflag1++; else nflag0++;
      in_valid = 0;
    end
    chk(nflag1 > 0 && nflag0 > 0, "both mantissa groups exercised");
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

// tb_pe: checks both PE types. A random BBFP(6,3) weight is preloaded, then
// random activations and incoming partial sums are applied; one clock later
// the outgoing partial sum must equal psum_in + a*w (or psum_in when the
// activation is not valid), the activation must be forwarded, and the type
// (1) PE must output activation exponent + weight exponent while the type
// (2) PE passes the exponent from above.
module tb_pe;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_load, w_sign, w_flag; logic [5:0] w_mant; logic [4:0] w_exp;
  logic a_valid_in, a_sign_in, a_flag_in; logic [5:0] a_mant_in; logic [4:0] a_exp_in;
  logic signed [20:0] psum_in;
  logic [5:0] exp_in;
  logic av1, as1, af1, av2, as2, af2; logic [5:0] am1, am2;
  logic signed [20:0] po1, po2;
  logic [5:0] eo1, eo2;
  pe #(.EXP_ADD(1'b1)) dut1 (.clk, .rst_n, .w_load, .w_sign, .w_flag, .w_mant, .w_exp,
    .a_valid_in, .a_sign_in, .a_flag_in, .a_mant_in, .a_exp_in,
    .a_valid_out(av1), .a_sign_out(as1), .a_flag_out(af1), .a_mant_out(am1),
    .psum_in, .psum_out(po1), .exp_in, .exp_out(eo1));
  pe #(.EXP_ADD(1'b0)) dut2 (.clk, .rst_n, .w_load, .w_sign, .w_flag, .w_mant, .w_exp,
    .a_valid_in, .a_sign_in, .a_flag_in, .a_mant_in, .a_exp_in,
    .a_valid_out(av2), .a_sign_out(as2), .a_flag_out(af2), .a_mant_out(am2),
    .psum_in, .psum_out(po2), .exp_in, .exp_out(eo2));
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL: %s", what); end
  endtask
  initial begin
    {w_load, w_sign, w_flag, w_mant, w_exp, a_valid_in, a_sign_in, a_flag_in, a_mant_in, a_exp_in} = '0;
    psum_in = '0; exp_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int wv, av, sh;
      longint expv;
      logic [4:0] we;
      logic ws, wf; logic [5:0] wm;
      if (t % 50 == 0) begin
        @(negedge clk);
        w_load = 1; {w_sign, w_flag, w_mant, w_exp} = 13'($urandom);
        ws = w_sign; wf = w_flag; wm = w_mant; we = w_exp;
        @(negedge clk); w_load = 0;
        {w_sign, w_flag, w_mant, w_exp} = 13'($urandom);   // must be ignored
      end
      @(negedge clk);
      a_valid_in = ($urandom % 4 != 0);
      {a_sign_in, a_flag_in, a_mant_in, a_exp_in} = 13'($urandom);
      psum_in = 21'($urandom % 300000) - 21'sd150000;
      exp_in = 6'($urandom);
      wv = (ws ? -1 : 1) * int'(wm) * (wf ? 8 : 1);
      av = (a_sign_in ? -1 : 1) * int'(a_mant_in) * (a_flag_in ? 8 : 1);
      expv = a_valid_in ? longint'(psum_in) + longint'(wv * av) : longint'(psum_in);
      @(posedge clk); #1;
      chk(po1 == 21'(expv) && po2 == 21'(expv), $sformatf("psum got %0d/%0d exp %0d", po1, po2, expv));
      chk(av1 == a_valid_in && am1 == a_mant_in && as1 == a_sign_in && af1 == a_flag_in, "forwarded input");
      if (a_valid_in) chk(eo1 == 6'(a_exp_in) + 6'(we), $sformatf("exp adder %0d", eo1));
      chk(eo2 == exp_in, "exponent bypass");
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

// tb_bbfp_psum_adder: random and corner checks of the sparse partial-sum
// adder (2M-bit adder plus carry chain) against plain integer addition of
// the expanded product, for BBFP(6,3) with a 21-bit accumulator and
// BBFP(4,2) with a 16-bit one. Counts carries and borrows that run into
// the carry chain, which must both occur.
module tb_bbfp_psum_adder;
  int checks = 0, failures = 0;
  logic signed [20:0] ps6, po6;
  logic s6; logic [1:0] f6; logic [11:0] m6;
  logic signed [15:0] ps4, po4;
  logic s4; logic [1:0] f4; logic [7:0] m4;
  bbfp_psum_adder #(.M(6), .O(3), .ACC_W(21)) dut6 (.psum_in(ps6), .p_sign(s6), .p_flag(f6), .p_mant(m6), .psum_out(po6));
  bbfp_psum_adder #(.M(4), .O(2), .ACC_W(16)) dut4 (.psum_in(ps4), .p_sign(s4), .p_flag(f4), .p_mant(m4), .psum_out(po4));
  int carries = 0, borrows = 0;
  initial begin
    for (int t = 0; t < 20000; t++) begin
      longint e6, e4;
      int k6, k4;
      ps6 = 21'($urandom); s6 = 1'($urandom); f6 = 2'($urandom); m6 = 12'($urandom);
      ps4 = 16'($urandom); s4 = 1'($urandom); f4 = 2'($urandom); m4 = 8'($urandom);
      if (t % 4 == 0) ps6 = s6 ? 21'sd0 : -21'sd1;   // long carry / borrow chains
      if (t % 4 == 1) ps4 = s4 ? 16'sd0 : -16'sd1;
      #1;
      k6 = 3 * (int'(f6[1]) + int'(f6[0]));
      k4 = 2 * (int'(f4[1]) + int'(f4[0]));
      e6 = longint'(ps6) + (s6 ? -1 : 1) * (longint'(m6) <<< k6);
      e4 = longint'(ps4) + (s4 ? -1 : 1) * (longint'(m4) <<< k4);
      checks += 2;
      if (po6 != 21'(e6)) begin failures++; if (failures < 6) $display("FAIL6 ps=%0d s=%0d f=%0d m=%0d got %0d exp %0d", ps6, s6, f6, m6, po6, 21'(e6)); end
      if (po4 != 16'(e4)) begin failures++; if (failures < 6) $display("FAIL4 ps=%0d s=%0d f=%0d m=%0d got %0d exp %0d", ps4, s4, f4, m4, po4, 16'(e4)); end
      if ((po6 >>> (k6 + 12)) != (ps6 >>> (k6 + 12))) begin
        if (s6) borrows++; else carries++;
      end
    end
    checks++;
    if (carries == 0 || borrows == 0) begin failures++; $display("FAIL: carry chain not exercised"); end
    $display("carries into chain %0d, borrows %0d", carries, borrows);
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

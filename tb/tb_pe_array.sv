// tb_pe_array: loads random BBFP(6,3) weight tiles into the 4x4 array,
// streams activation vectors (back to back) and checks each output vector
// against the integer matrix-vector product, the summed shared exponent,
// and the latency ROWS+COLS-1 cycles from input to output.
module tb_pe_array;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int R = 4, C = 4, LAT = R + C - 1;
  logic w_load; logic [4:0] w_exp;
  logic [R-1:0][C-1:0] w_sign, w_flag; logic [R-1:0][C-1:0][5:0] w_mant;
  logic in_valid; logic [4:0] a_exp;
  logic [R-1:0] a_sign, a_flag; logic [R-1:0][5:0] a_mant;
  logic out_valid; logic [5:0] out_exp; logic [C-1:0][20:0] out_psum;
  pe_array dut (.*);

  int wv [R][C];
  int expq [$];      // expected results, one per column, in order
  int tq [$];        // issue cycle of each vector
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    w_load = 0; in_valid = 0; w_exp = '0; a_exp = '0;
    w_sign = '0; w_flag = '0; w_mant = '0; a_sign = '0; a_flag = '0; a_mant = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 20; tile++) begin
      @(negedge clk);
      w_load = 1; w_exp = 5'($urandom); w_sign = 16'($urandom); w_flag = 16'($urandom);
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        w_mant[r][c] = 6'($urandom);
        wv[r][c] = (w_sign[r][c] ? -1 : 1) * int'(w_mant[r][c]) * (w_flag[r][c] ? 8 : 1);
      end
      a_exp = 5'($urandom);
      for (int v = 0; v < 4; v++) begin
        @(negedge clk);
        w_load = 0;
        in_valid = 1; a_sign = 4'($urandom); a_flag = 4'($urandom);
        for (int r = 0; r < R; r++) a_mant[r] = 6'($urandom);
        for (int c = 0; c < C; c++) begin
          automatic int s = 0;
          for (int r = 0; r < R; r++)
            s += wv[r][c] * (a_sign[r] ? -1 : 1) * int'(a_mant[r]) * (a_flag[r] ? 8 : 1);
          expq.push_back(s);
        end
        tq.push_back(cyc);
      end
      @(negedge clk); in_valid = 0;
      // wait until drained, check exponent
      repeat (LAT + 1) @(negedge clk);
      checks++;
      if (out_exp != 6'(a_exp) + 6'(w_exp)) begin failures++; $display("FAIL exp %0d", out_exp); end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d results missing", expq.size() / C); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int t0, e;
    t0 = tq.pop_front();
    checks++;
    if (cyc - t0 != LAT) begin failures++; $display("FAIL latency %0d", cyc - t0); end
    for (int c = 0; c < C; c++) begin
      e = expq.pop_front();
      checks++;
      if (32'($signed(out_psum[c])) != e) begin
        failures++;
        if (failures < 8) $display("FAIL col %0d got %0d exp %0d", c, 32'($signed(out_psum[c])), e);
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

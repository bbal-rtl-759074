// tb_bbal_top: end-to-end test of the accelerator at its default size.
//
// Fills the input buffer with random FP16 activation tiles and the weight
// buffer with random BBFP(6,3) weight tiles, then runs matrix-multiply
// commands over 1 to 4 K-steps, alternating the data selector between the
// output encoder (BBFP result) and the nonlinear unit (softmax, sigmoid,
// SILU, GELU). The reference model works on real numbers: it encodes each
// activation tile with the paper's rule, forms the exact integer dot
// products, converts each K-step's result to FP16 (truncation) and adds
// the K-steps one after the other in FP16 (truncation), which is what the
// FP encoder and FP adder must reproduce bit for bit. The BBFP output
// block is checked bit for bit; the nonlinear results within the table
// quantisation tolerance. It counts how often each mechanism occurred:
// high and low mantissas, negative products in the carry chain, FP
// accumulation over K-steps, sub-table loads, memory stalls, each
// nonlinear operation and the bypass to the output encoder.
module tb_bbal_top;
  import bbal_tb_pkg::*;
  import bbal_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ib_we, wb_we, cmd_valid, cmd_ready, cmd_nl_en;
  logic [5:0] ib_waddr, wb_waddr, cmd_ibase, cmd_wbase;
  logic [6:0] cmd_ktiles;
  itile_t ib_wdata;
  wtile_t wb_wdata;
  nl_op_e cmd_nl_op;
  logic nl_out_valid, enc_out_valid, done;
  logic [15:0][15:0] nl_out_data;
  otile_t enc_out;
  logic [15:0] res_max;
  logic mem_req, mem_ready, mem_rvalid;
  logic [14:0] mem_addr;
  logic [15:0] mem_rdata;

  bbal_top dut (.*);
  lut_mem_model #(.LAT(4), .STALL(1'b1)) u_mem (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  itile_t itiles [64];
  wtile_t wtiles [64];

  // mechanism counters
  int n_flag_hi = 0, n_flag_lo = 0, n_neg_prod = 0, n_fp_acc = 0, n_lut_load = 0;
  int n_stall = 0, n_enc_path = 0;
  int n_nl [4] = '{0, 0, 0, 0};
  always @(posedge clk) if (rst_n) begin
    if (dut.state == dut.C_FEED) begin
      for (int r = 0; r < 4; r++) begin
        if (dut.arr_flag[r]) n_flag_hi++; else n_flag_lo++;
      end
    end
    if (dut.u_array.g_col[0].g_row[0].u_pe.a_valid_in && dut.u_array.g_col[0].g_row[0].u_pe.p_sign)
      n_neg_prod++;
    if (dut.state == dut.C_ACC && dut.ob_rvalid && dut.kt != 0) n_fp_acc++;
    if (dut.u_nl.dma_start) n_lut_load++;
    if (mem_req && !mem_ready) n_stall++;
  end

  // reference: one command
  task automatic run_cmd(input int ib, input int wb, input int k, input bit nl,
                         input nl_op_e op);
    logic [15:0] acc [16];
    logic [15:0] x [];
    int cyc;
    for (int kt = 0; kt < k; kt++) begin
      int es, sc;
      int av [16];
      x = new[16];
      for (int i = 0; i < 16; i++) x[i] = itiles[ib + kt][i];
      es = ref_es(x, 6, 3);
      for (int i = 0; i < 16; i++) begin
        logic f; int mnt;
        ref_elem(x[i], es, 6, 3, f, mnt);
        av[i] = (x[i][15] ? -1 : 1) * mnt * (f ? 8 : 1);
      end
      for (int t = 0; t < 4; t++)
        for (int c = 0; c < 4; c++) begin
          longint s;
          logic [15:0] p;
          s = 0;
          for (int r = 0; r < 4; r++) begin
            wtile_t w;
            int wv;
            w  = wtiles[wb + kt];
            wv = (w.sign[r][c] ? -1 : 1) * int'(w.mant[r][c]) * (w.flag[r][c] ? 8 : 1);
            s += longint'(av[t*4 + r] * wv);
          end
          p = real_to_fp16(real'(s) * pow2(es + int'(wtiles[wb + kt].exp) - 40));
          acc[t*4 + c] = (kt == 0) ? p : real_to_fp16(fp16_to_real(acc[t*4 + c]) + fp16_to_real(p));
        end
    end
    // issue
    @(negedge clk);
    cmd_valid = 1; cmd_ibase = 6'(ib); cmd_wbase = 6'(wb); cmd_ktiles = 7'(k);
    cmd_nl_en = nl; cmd_nl_op = op;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
    cyc = 0;
    while (!done && cyc < 20000) begin
      @(negedge clk); cyc++;
      if (nl_out_valid) begin
        real z, tot, xr [16];
        z = 0.0; tot = 0.0;
        for (int i = 0; i < 16; i++) begin xr[i] = fp16_to_real(acc[i]); z += $exp(xr[i]); end
        for (int i = 0; i < 16; i++) begin
          real y, r, tol, err;
          y = fp16_to_real(nl_out_data[i]);
          case (op)
            NL_SOFTMAX: begin r = $exp(xr[i]) / z; tol = 0.02 + 0.1 * r; end
            NL_SIGMOID: begin r = 1.0 / (1.0 + $exp(-xr[i])); tol = 0.03; end
            NL_GELU:    begin r = xr[i] * gelu_phi(xr[i]); tol = 0.03 + 0.03 * (xr[i] < 0 ? -xr[i] : xr[i]); end
            default:    begin r = xr[i] / (1.0 + $exp(-xr[i])); tol = 0.03 + 0.03 * (xr[i] < 0 ? -xr[i] : xr[i]); end
          endcase
          err = (y > r) ? y - r : r - y;
          tot += y;
          chk(err <= tol, $sformatf("nl op %0d lane %0d in %f got %f exp %f", op, i, xr[i], y, r));
        end
        if (op == NL_SOFTMAX) chk(tot > 0.95 && tot < 1.05, "softmax sums to one");
        n_nl[op]++;
      end
      if (enc_out_valid) begin
        int es;
        logic [15:0] xo [];
        xo = new[16];
        for (int i = 0; i < 16; i++) xo[i] = acc[i];
        es = ref_es(xo, 6, 3);
        chk(int'(enc_out.es) == es, "output block exponent");
        for (int i = 0; i < 16; i++) begin
          logic f; int mnt;
          ref_elem(xo[i], es, 6, 3, f, mnt);
          chk(enc_out.sign[i] == xo[i][15] && enc_out.flag[i] == f && int'(enc_out.mant[i]) == mnt,
              $sformatf("output element %0d of %h", i, xo[i]));
        end
        n_enc_path++;
      end
    end
    chk(done, "command completes");
    // the max unit saw the accumulated FP16 result
    begin
      real best;
      best = -1.0e9;
      for (int i = 0; i < 16; i++) if (fp16_to_real(acc[i]) > best) best = fp16_to_real(acc[i]);
      chk(fp16_to_real(res_max) == best, "max unit result");
    end
    $display("cmd k=%0d nl=%0d op=%0d: %0d cycles", k, nl, op, cyc);
  endtask

  initial begin
    ib_we = 0; wb_we = 0; cmd_valid = 0; cmd_nl_en = 0; cmd_nl_op = NL_SOFTMAX;
    ib_waddr = 0; wb_waddr = 0; cmd_ibase = 0; cmd_wbase = 0; cmd_ktiles = 0;
    ib_wdata = '0; wb_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill the buffers
    for (int a = 0; a < 64; a++) begin
      for (int i = 0; i < 16; i++) itiles[a][i] = rand_fp16(9, 14);
      wtiles[a] = wtile_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
      wtiles[a].exp = 5'(7 + $urandom % 3);
      @(negedge clk);
      ib_we = 1; ib_waddr = 6'(a); ib_wdata = itiles[a];
      wb_we = 1; wb_waddr = 6'(a); wb_wdata = wtiles[a];
    end
    @(negedge clk); ib_we = 0; wb_we = 0;
    for (int n = 0; n < 12; n++) begin
      automatic int k = 1 + n % 4;
      run_cmd(int'($urandom % 60), int'($urandom % 60), k, (n % 4) != 0, nl_op_e'((n - n / 4 - 1) % 4));
    end
    $display("mechanisms: high mantissas %0d, low mantissas %0d, negative products %0d, FP accumulations %0d",
             n_flag_hi, n_flag_lo, n_neg_prod, n_fp_acc);
    $display("            sub-table loads %0d, memory stalls %0d, softmax %0d, sigmoid %0d, silu %0d, gelu %0d, output-encoder path %0d",
             n_lut_load, n_stall, n_nl[0], n_nl[1], n_nl[2], n_nl[3], n_enc_path);
    chk(n_flag_hi > 0, "high mantissas used");
    chk(n_flag_lo > 0, "low mantissas used");
    chk(n_neg_prod > 0, "negative products");
    chk(n_fp_acc > 0, "FP accumulation over K-steps");
    chk(n_lut_load > 0, "sub-table loads");
    chk(n_stall > 0, "memory stalls");
    for (int k = 0; k < 4; k++) chk(n_nl[k] > 0, "each nonlinear operation");
    chk(n_enc_path > 0, "output encoder path");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

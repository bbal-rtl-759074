// tb_nonlinear_unit: runs softmax, sigmoid, SILU and GELU vectors through the
// nonlinear unit, with the sub-tables served by lut_mem_model (latency and
// random stalls), and compares the FP16 results with the exact functions.
// The LUT is addressed by 7 bits of the BBFP operand, so the results carry
// a table quantisation error; the tolerances below bound it. Softmax
// outputs must also sum to about one. Each operation must hand out its
// result only after the sub-table is loaded, and must take at least the
// 8 pipeline cycles. Vectors are sent as soon as the unit takes them (with
// a pause after every third), so a new vector enters while the previous
// one is still in the back end; results are matched in order, and the
// overlap must have happened. Softmax inputs are non-negative so that
// x - max stays inside the block's range.
module tb_nonlinear_unit;
  import bbal_tb_pkg::*;
  import bbal_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid;
  nl_op_e in_op;
  logic [15:0][15:0] in_data, out_data;
  logic mem_req, mem_ready, mem_rvalid;
  logic [14:0] mem_addr;
  logic [15:0] mem_rdata;
  logic [4:0] in_max_exp = '0;   // unused: the unit finds the block max itself
  logic [15:0] in_max = '0;
  nonlinear_unit dut (.*);
  lut_mem_model #(.LAT(3), .STALL(1'b1)) u_mem (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int nops [4] = '{0, 0, 0, 0};
  real maxerr [4] = '{0.0, 0.0, 0.0, 0.0};
  int n_overlap = 0, n_done = 0;
  localparam int NVEC = 60;

  // vectors in flight, oldest first
  typedef struct { real x [16]; nl_op_e op; longint t_in; } job_t;
  job_t jobs [$];
  longint now = 0;
  always @(posedge clk) now++;
  // overlap: a new vector enters while an earlier one is still inside
  always @(posedge clk) if (in_valid && in_ready && jobs.size() > 1) n_overlap++;

  // checker: results leave in order
  always @(negedge clk) if (rst_n && out_valid) begin
    job_t j;
    real y [16], ref_y [16], z, tot;
    chk(jobs.size() > 0, "result with a vector in flight");
    if (jobs.size() > 0) begin
      j = jobs.pop_front();
      chk(now - j.t_in >= 8 + 129, $sformatf("waits for the sub-table load (%0d cycles)", now - j.t_in));
      z = 0.0;
      for (int i = 0; i < 16; i++) z += $exp(j.x[i]);
      tot = 0.0;
      for (int i = 0; i < 16; i++) begin
        real err, tol, x;
        x = j.x[i];
        y[i] = fp16_to_real(out_data[i]);
        case (j.op)
          NL_SOFTMAX: begin ref_y[i] = $exp(x) / z; tol = 0.02 + 0.1 * ref_y[i]; end
          NL_SIGMOID: begin ref_y[i] = 1.0 / (1.0 + $exp(-x)); tol = 0.03; end
          NL_GELU:    begin ref_y[i] = x * gelu_phi(x); tol = 0.03 + 0.03 * (x < 0 ? -x : x); end
          default:    begin ref_y[i] = x / (1.0 + $exp(-x)); tol = 0.03 + 0.03 * (x < 0 ? -x : x); end
        endcase
        err = y[i] - ref_y[i];
        if (err < 0) err = -err;
        if (err > maxerr[j.op]) maxerr[j.op] = err;
        tot += y[i];
        chk(err <= tol, $sformatf("op %0d lane %0d x=%f got %f exp %f", j.op, i, x, y[i], ref_y[i]));
      end
      if (j.op == NL_SOFTMAX) chk(tot > 0.95 && tot < 1.05, $sformatf("softmax sum %f", tot));
      nops[j.op]++;
    end
    n_done++;
  end

  initial begin
    in_valid = 0; in_op = NL_SOFTMAX; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NVEC; t++) begin
      job_t j;
      j.op = nl_op_e'(t % 4);
      @(negedge clk);
      for (int i = 0; i < 16; i++) begin
        // |x| < 4; below 1 for sigmoid, whose table 1+e^-x spans a wide range
        in_data[i] = rand_fp16(10, (j.op == NL_SIGMOID) ? 14 : 16);
        // softmax: x >= 0 keeps every x - max inside the block's range
        // (larger differences saturate in the SUB unit)
        if (j.op == NL_SOFTMAX) in_data[i][15] = 1'b0;
        j.x[i] = fp16_to_real(in_data[i]);
      end
      in_op = j.op; in_valid = 1;
      while (!in_ready) @(negedge clk);
      j.t_in = now;
      jobs.push_back(j);
      @(negedge clk); in_valid = 0;
      // every third vector waits for the unit to empty, the others are
      // sent as soon as the unit takes them
      if (t % 3 == 2) while (jobs.size() > 0) @(negedge clk);
    end
    while (n_done < NVEC) @(negedge clk);
    repeat (20) @(negedge clk);
    chk(n_done == NVEC, "one result per vector");
    $display("max abs error softmax %f sigmoid %f silu %f gelu %f", maxerr[0], maxerr[1], maxerr[2], maxerr[3]);
    $display("vectors accepted while another was in flight: %0d", n_overlap);
    for (int k = 0; k < 4; k++) chk(nops[k] > 0, "every operation ran");
    chk(n_overlap > 0, "pipeline overlap happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// lut_mem_model: behavioural model of the external memory that holds the
// nonlinear sub-tables (not synthesizable, testbench only). Word address
// {function, exponent, index}; index 0 is the header holding the table's
// output exponent, indices 1..128 the BBFP(10,5) entries. The entry for LUT
// address {s, f, m5} is the function of the operand at the middle of the
// bucket that address covers: x = +-(32*m5 + 16) * 2^(5f) * 2^(es-24).
// Tables: 0 softmax e^x (e^0 for the unused positive half), 1 sigmoid's 1 + e^-x, 2 SILU's sigmoid(x),
// 3 GELU's Phi(x).
// Requests are accepted when mem_ready (randomly low for STALL=1); data
// return LAT cycles later, in order.
module lut_mem_model #(
  parameter int LAT   = 3,
  parameter bit STALL = 1'b1
) (
  input  logic        clk,
  input  logic        mem_req,
  input  logic [14:0] mem_addr,
  output logic        mem_ready,
  output logic        mem_rvalid,
  output logic [15:0] mem_rdata
);
  import bbal_tb_pkg::*;

  function automatic real fval(input int fn, input real x);
    real y;
    case (fn)
      0:       y = $exp(x);
      1:       y = 1.0 + $exp(-x);
      2:       y = 1.0 / (1.0 + $exp(-x));
      default: y = gelu_phi(x);
    endcase
    if (y > 60000.0) y = 60000.0;
    return y;
  endfunction

  function automatic int fp_exp(input real a);   // biased FP16 exponent of a > 0
    int e = 15;
    real m = a;
    if (a == 0.0) return 1;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    return (e < 1) ? 1 : e;
  endfunction

  function automatic real operand(input int es, input int idx);
    int s = (idx >> 6) & 1, f = (idx >> 5) & 1, m5 = idx & 31;
    real x = real'(32 * m5 + 16) * (f ? 32.0 : 1.0) * pow2(es - 24);
    return s ? -x : x;
  endfunction

  // softmax only ever looks up x - max <= 0: its positive half holds e^0
  function automatic real entry_val(input int fn, input int es, input int idx);
    if (fn == 0 && ((idx >> 6) & 1) == 0) return 1.0;
    return fval(fn, operand(es, idx));
  endfunction

  function automatic int table_exp(input int fn, input int es);
    int mx = 1;
    for (int i = 0; i < 128; i++) begin
      int e = fp_exp(entry_val(fn, es, i));
      if (e > mx) mx = e;
    end
    return (mx - 5 > 0) ? mx - 5 : 0;
  endfunction

  function automatic logic [15:0] word(input logic [14:0] a);
    int fn = int'(a[14:13]), es = int'(a[12:8]), w = int'(a[7:0]);
    int L = table_exp(fn, es);
    real y, sc;
    int  f, mant;
    if (w == 0) return 16'(L);
    y  = entry_val(fn, es, w - 1);
    f  = (fp_exp(y) > L) ? 1 : 0;
    sc = pow2(L - 24) * (f ? 32.0 : 1.0);
    mant = $rtoi(y / sc);
    if (mant > 1023) mant = 1023;
    return {4'd0, 1'b0, 1'(f), 10'(mant)};
  endfunction

  logic [15:0] pipe_d [LAT];
  logic        pipe_v [LAT];
  initial begin
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 0; pipe_d[i] = 0; end
    mem_ready = 1;
  end
  always @(posedge clk) begin
    pipe_v[0] <= mem_req && mem_ready;
    pipe_d[0] <= word(mem_addr);
    for (int i = 1; i < LAT; i++) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    mem_ready <= STALL ? ($urandom % 4 != 0) : 1'b1;
  end
  assign mem_rvalid = pipe_v[LAT-1];
  assign mem_rdata  = pipe_d[LAT-1];
endmodule

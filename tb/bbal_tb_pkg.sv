// bbal_tb_pkg: reference arithmetic for the BBAL testbenches, written with
// real numbers so that it is independent of the bit-level RTL.
package bbal_tb_pkg;

  function automatic real pow2(input int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp16_to_real(input logic [15:0] x);
    real m;
    int  e;
    e = int'(x[14:10]);
    if (e == 0) m = real'(x[9:0]) * pow2(-24);
    else        m = (1.0 + real'(x[9:0]) / 1024.0) * pow2(e - 15);
    return x[15] ? -m : m;
  endfunction

  // FP16 with truncation towards zero and saturation at the largest finite
  function automatic logic [15:0] real_to_fp16(input real r);
    logic s;
    real  a, m;
    int   e;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a == 0.0) return 16'h0000;
    if (a >= 65536.0) return {s, 15'h7BFF};
    if (a < pow2(-14)) return {s, 5'd0, 10'($rtoi(a * pow2(24)))};
    e = 0;
    m = a;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    return {s, 5'(e + 15), 10'($rtoi((m - 1.0) * 1024.0))};
  endfunction

  // a random finite FP16 with biased exponent in [elo, ehi]
  function automatic logic [15:0] rand_fp16(input int elo, input int ehi);
    int e = elo + int'($urandom % (ehi - elo + 1));
    return {1'($urandom), 5'(e), 10'($urandom)};
  endfunction

  // value of a BBFP(m,o) element in shared exponent es
  function automatic real bbfp_real(input logic s, input logic f, input int mant,
                                    input int es, input int m, input int o);
    real v = real'(mant) * (f ? pow2(m - o) : 1.0) * pow2(es - 15 - (m - 1));
    return s ? -v : v;
  endfunction

  // reference shared exponent of a block of FP16 values: Max(E)-(m-o), >= 0
  function automatic int ref_es(input logic [15:0] x [], input int m, input int o);
    int mx = 1;
    foreach (x[i]) begin
      int e = (x[i][14:10] == 0) ? 1 : int'(x[i][14:10]);
      if (e > mx) mx = e;
    end
    return (mx - (m - o) > 0) ? mx - (m - o) : 0;
  endfunction

  // reference BBFP element: flag from the exponent, mantissa = trunc(|x|/scale)
  function automatic void ref_elem(input logic [15:0] x, input int es, input int m,
                                   input int o, output logic f, output int mant);
    int  e = (x[14:10] == 0) ? 1 : int'(x[14:10]);
    real a = fp16_to_real(x);
    if (a < 0.0) a = -a;
    f    = (e > es);
    mant = $rtoi(a / (pow2(es - 15 - (m - 1)) * (f ? pow2(m - o) : 1.0)));
  endfunction

  // Gaussian CDF Phi(x) in the usual tanh form; GELU(x) = x * Phi(x)
  function automatic real gelu_phi(input real x);
    return 0.5 * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
  endfunction

endpackage

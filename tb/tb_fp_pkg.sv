// tb_fp_pkg: reference arithmetic for the testbenches. Converts Bfloat16
// and FP32 codes to real numbers with plain real arithmetic (no use of the
// design's own formulas), builds random Bfloat16 values and gives the error
// bound used to judge a reduced dot product.
package tb_fp_pkg;

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int k = 0; k < e; k++) r = r * 2.0;
    else        for (int k = 0; k < -e; k++) r = r / 2.0;
    return r;
  endfunction

  // Bfloat16 value; subnormals read as zero (the design flushes them)
  function automatic real bf16_to_real(input logic [15:0] x);
    real m;
    if (x[14:7] == 8'd0) return 0.0;
    m = 1.0 + real'(x[6:0]) / 128.0;
    m = m * pow2(int'(x[14:7]) - 127);
    return x[15] ? -m : m;
  endfunction

  function automatic real fp32_to_real(input logic [31:0] x);
    real m;
    if (x[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(x[22:0]) / 8388608.0;
    m = m * pow2(int'(x[30:23]) - 127);
    return x[31] ? -m : m;
  endfunction

  // random Bfloat16 with unbiased exponent in [emin, emax]
  function automatic logic [15:0] rand_bf16(input int emin, input int emax);
    logic [15:0] x;
    int span;
    span  = emax - emin + 1;
    x[15]   = 1'($urandom_range(1));
    x[14:7] = 8'(127 + emin + int'($urandom_range(span - 1)));
    x[6:0]  = 7'($urandom_range(127));
    return x;
  endfunction

  // small integer-valued Bfloat16 in [-7, 7]: dot products of these are
  // exact in FP32, so a result must match bit for bit
  function automatic logic [15:0] small_int_bf16(input int v);
    int a, e;
    logic [15:0] x;
    a = (v < 0) ? -v : v;
    if (a == 0) return 16'h0000;
    e = 0;
    while ((1 << (e + 1)) <= a) e++;
    x[15]   = (v < 0);
    x[14:7] = 8'(127 + e);
    x[6:0]  = 7'((a - (1 << e)) << (7 - e));
    return x;
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

endpackage

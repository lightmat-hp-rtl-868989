// tb_ref_pkg -- reference arithmetic for the testbenches.
//
// Written with real (double) arithmetic, independently of the RTL:
//   fp32_to_real      decode an FP32 bit pattern (subnormals as zero)
//   real_to_fp32_rne  round a real to FP32, nearest-even (normal range only)
//   bfp_shared_exp    e_s = floor(log2 max|x|) - (b-1), clamped to EXP_W bits
//   bfp_mantissa      round(|x| / 2^e_s), half up, saturated at 2^b - 1
//   rand_fp32         random FP32 value with a chosen exponent spread
// Every value handled here has at most 53 significant bits, so the real
// arithmetic is exact.
package tb_ref_pkg;

  function automatic real pow2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp32_to_real(logic [31:0] b);
    real m;
    if (b[30:23] == 8'd0) return 0.0;
    m = (1.0 + real'(b[22:0]) / 8388608.0) * pow2(int'(b[30:23]) - 127);
    return b[31] ? -m : m;
  endfunction

  function automatic logic [31:0] real_to_fp32_rne(real x);
    real ax, sc, rem;
    int  e;
    longint f;
    logic s;
    if (x == 0.0) return 32'h0;
    s  = (x < 0.0);
    ax = s ? -x : x;
    e  = 0;
    while (ax >= pow2(e + 1)) e++;
    while (ax < pow2(e)) e--;
    sc  = ax / pow2(e - 23);
    f   = longint'($floor(sc));
    rem = sc - real'(f);
    if (rem > 0.5 || (rem == 0.5 && f[0])) f++;
    if (f == 64'd16777216) begin f = 64'd8388608; e++; end
    return {s, 8'(e + 127), f[22:0]};
  endfunction

  function automatic int bfp_shared_exp(logic [31:0] vals[$], int b, int exp_w);
    int mx = 0;
    int es;
    foreach (vals[i]) if (int'(vals[i][30:23]) > mx) mx = int'(vals[i][30:23]);
    if (mx == 0) return -(1 << (exp_w - 1));
    es = (mx - 127) - (b - 1);
    if (es > (1 << (exp_w - 1)) - 1) es = (1 << (exp_w - 1)) - 1;
    if (es < -(1 << (exp_w - 1)))    es = -(1 << (exp_w - 1));
    return es;
  endfunction

  function automatic int bfp_mantissa(logic [31:0] x, int es, int b);
    real v;
    int  mx = (1 << b) - 1;
    if (x[30:23] == 8'd0) return 0;
    if (x[30:23] == 8'hFF) return mx;
    v = fp32_to_real({1'b0, x[30:0]}) / pow2(es);
    v = $floor(v + 0.5);
    if (v > real'(mx)) return mx;
    return int'(v);
  endfunction

  // Random FP32: sign random, exponent in [ebase, ebase+espread], random fraction;
  // with probability 1/zero_1_in a zero.
  function automatic logic [31:0] rand_fp32(int ebase, int espread, int zero_1_in);
    if (zero_1_in > 0 && ($urandom % zero_1_in) == 0) return 32'h0;
    return {1'($urandom), 8'(ebase + int'($urandom % (espread + 1))), 23'($urandom)};
  endfunction

endpackage

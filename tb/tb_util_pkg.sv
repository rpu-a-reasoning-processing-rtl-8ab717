// tb_util_pkg -- reference arithmetic for the testbenches, written with
// `real` numbers and independent of the RTL's floating-point helpers.
//   bf16_val / fp32_val   decode a BF16 / FP32 encoding to a real
//   real_to_bf16          round a real to BF16, nearest-even (no subnormals)
//   real_to_fp32          round a real to FP32, nearest-even (no subnormals)
package tb_util_pkg;

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real bf16_val(input logic [15:0] b);
    real v;
    if (b[14:7] == 0) return 0.0;
    v = (1.0 + real'(b[6:0]) / 128.0) * pow2(int'(b[14:7]) - 127);
    return b[15] ? -v : v;
  endfunction

  function automatic real fp32_val(input logic [31:0] b);
    real v;
    if (b[30:23] == 0) return 0.0;
    v = (1.0 + real'(b[22:0]) / 8388608.0) * pow2(int'(b[30:23]) - 127);
    return b[31] ? -v : v;
  endfunction

  // Round |x| to `mb` fraction bits; returns {sign, biased exponent, fraction}.
  function automatic logic [63:0] round_fp(input real x, input int mb);
    logic s;
    int   e;
    real  a, sc, rem;
    longint f, one;
    s = x < 0.0;
    a = s ? -x : x;
    if (a == 0.0) return {63'd0, s} << 63;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    one = longint'(1) << mb;
    sc  = a * real'(one);
    f   = longint'($floor(sc));
    rem = sc - real'(f);
    if (rem > 0.5 || (rem == 0.5 && f[0])) f++;
    if (f == 2 * one) begin f = one; e++; end
    return {s, 31'(e + 127), 32'(f - one)};
  endfunction

  function automatic logic [15:0] real_to_bf16(input real x);
    logic [63:0] r;
    r = round_fp(x, 7);
    if (r[62:32] == 0 && r[31:0] == 0 && x == 0.0) return {r[63], 15'h0};
    return {r[63], r[39:32], r[6:0]};
  endfunction

  function automatic logic [31:0] real_to_fp32(input real x);
    logic [63:0] r;
    r = round_fp(x, 23);
    if (x == 0.0) return 32'h0;
    return {r[63], r[39:32], r[22:0]};
  endfunction

endpackage

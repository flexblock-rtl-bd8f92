// tb_util_pkg: reference helpers shared by the testbenches.
//   f2r(bits)  FP32 bit pattern to real (subnormals read as zero)
//   r2f(x)     real to FP32 bits, round to nearest even, results below the
//              smallest normal flush to +0 and large values become infinity,
//              which is the behaviour the datapath converters implement
//   feq(a, b)  FP32 equality that treats +0 and -0 as equal
//   rnd_fp(lo, hi) random normal FP32 with exponent (unbiased) in [lo, hi]
// Used as a bit-exact model: any single FP32 operation of two FP32 values or
// of an integer below 2^53 is computed exactly in double precision before r2f.
package tb_util_pkg;
  function automatic real pow2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real f2r(logic [31:0] f);
    real m;
    if (f[30:23] == 8'd0) return 0.0;
    m = (1.0 + real'(f[22:0]) / 8388608.0) * pow2(int'(f[30:23]) - 127);
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] r2f(real x);
    logic s;
    real a, m, fr;
    int e;
    longint mi;
    if (x == 0.0) return 32'h0;
    s = (x < 0.0);
    a = s ? -x : x;
    e = 0;
    while (a >= pow2(e + 1)) e++;
    while (a < pow2(e)) e--;
    m  = a * pow2(23 - e);
    mi = longint'($floor(m));
    fr = m - real'(mi);
    if (fr > 0.5 || (fr == 0.5 && mi[0])) mi++;
    if (mi == (longint'(1) << 24)) begin mi = mi >> 1; e++; end
    if (e < -126) return 32'h0;
    if (e > 127)  return {s, 8'hFF, 23'h0};
    return {s, 8'(e + 127), mi[22:0]};
  endfunction

  function automatic bit feq(logic [31:0] a, logic [31:0] b);
    if (a[30:0] == 0 && b[30:0] == 0) return 1'b1;
    return a == b;
  endfunction

  function automatic logic [31:0] rnd_fp(int lo, int hi);
    int e = lo + int'($urandom % (hi - lo + 1));
    return {1'($urandom), 8'(e + 127), 23'($urandom)};
  endfunction
endpackage

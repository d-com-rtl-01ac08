// fp16_ref_pkg: reference FP16 arithmetic for the testbenches.
//
// Works on double-precision reals, where every FP16 product and every sum of
// two FP16 values is exact, and then rounds once to FP16 (nearest even,
// subnormals flushed to zero, overflow to infinity). This is written apart
// from the RTL so that it is an independent check of fp16_mul and fp16_add.
package fp16_ref_pkg;

  function automatic real h2r(input logic [15:0] h);
    real m;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    e = e - 15;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2h(input real r);
    logic s;
    real  x, fr;
    int   e;
    longint ip;
    if (r == 0.0) return 16'h0000;
    s = (r < 0.0);
    x = s ? -r : r;
    e = 0;
    while (x >= 2.0) begin x = x / 2.0; e++; end
    while (x < 1.0)  begin x = x * 2.0; e--; end
    x  = x * 1024.0;
    ip = longint'($floor(x));
    fr = x - real'(ip);
    if (fr > 0.5 || (fr == 0.5 && ip[0])) ip++;
    if (ip == 2048) begin ip = 1024; e++; end
    if (e < -14) return {s, 15'h0000};
    if (e > 15)  return {s, 5'h1F, 10'h000};
    return {s, 5'(e + 15), ip[9:0]};
  endfunction

  function automatic logic [15:0] ref_mul(input logic [15:0] a, input logic [15:0] b);
    real p;
    p = h2r(a) * h2r(b);
    if (p == 0.0) return {a[15] ^ b[15], 15'h0000};
    return r2h(p);
  endfunction

  function automatic logic [15:0] ref_add(input logic [15:0] a, input logic [15:0] b);
    real s;
    s = h2r(a) + h2r(b);
    if (s == 0.0) begin
      if (h2r(a) == 0.0 && h2r(b) == 0.0) return {a[15] & b[15], 15'h0000};
      return 16'h0000;
    end
    return r2h(s);
  endfunction

  // Random normal FP16 value with exponent in [ebias-erange, ebias+erange].
  function automatic logic [15:0] rand_h(input int erange);
    logic [15:0] h;
    int e;
    e = 15 + int'($urandom_range(2 * erange)) - erange;
    h = {1'($urandom), 5'(e), 10'($urandom)};
    return h;
  endfunction

endpackage

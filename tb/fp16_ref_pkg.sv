// fp16_ref_pkg: reference FP16 arithmetic for the testbenches, computed with `real`.
//
// Operands are converted to double precision (subnormals read as zero), the exact sum or
// product is formed in double precision (exact for any two FP16 values), then rounded to an
// 11-bit significand with ties to even. Results below the smallest normal become zero,
// results of 2^16 or more become infinity. Independent of the RTL's bit-level datapath.
package fp16_ref_pkg;

  function automatic real fp16_to_real(input logic [15:0] h);
    real m;
    int  e;
    if (h[14:10] == 5'd0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    e = int'(h[14:10]) - 15;
    m = m * (2.0 ** e);
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp16(input real v);
    logic s;
    real  a, sc, fr;
    int   e;
    longint r;
    s = (v < 0.0);
    a = s ? -v : v;
    if (a == 0.0) return {s, 15'd0};
    e = 0;
    while (a >= (2.0 ** (e + 1))) e++;
    while (a < (2.0 ** e)) e--;
    sc = a / (2.0 ** (e - 10));
    r  = longint'($floor(sc));
    fr = sc - real'(r);
    if (fr > 0.5 || (fr == 0.5 && r[0])) r++;
    if (r == 2048) begin r = 1024; e++; end
    if (e < -14) return {s, 15'd0};
    if (e > 15)  return {s, 5'h1F, 10'd0};
    return {s, 5'(e + 15), 10'(r - 1024)};
  endfunction

  function automatic logic [15:0] ref_mul(input logic [15:0] a, input logic [15:0] b);
    return real_to_fp16(fp16_to_real(a) * fp16_to_real(b));
  endfunction

  function automatic logic [15:0] ref_add(input logic [15:0] a, input logic [15:0] b);
    return real_to_fp16(fp16_to_real(a) + fp16_to_real(b));
  endfunction

  // equal, treating +0 and -0 as the same value
  function automatic bit fp16_eq(input logic [15:0] a, input logic [15:0] b);
    if (a[14:0] == 15'd0 && b[14:0] == 15'd0) return 1'b1;
    return a == b;
  endfunction

  // random normal FP16 with exponent in [lo, hi]
  function automatic logic [15:0] rand_fp16(input int lo, input int hi);
    logic [15:0] h;
    h[15]    = 1'($urandom);
    h[14:10] = 5'(lo + int'($urandom % (hi - lo + 1)));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

endpackage

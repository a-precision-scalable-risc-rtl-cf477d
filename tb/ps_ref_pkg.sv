// ps_ref_pkg: lane-level reference model of the PE arithmetic for the testbenches.
// ref_mul: 32-bit packed operands -> 64-bit packed products; ref_add: lane-wise wrapping
// sums (FP16 through fp16_ref_pkg); ref_mac: acc + a*b. Written with plain integer
// arithmetic per lane, independent of the RTL's shift-and-add trees.
package ps_ref_pkg;
  import ps_pkg::*;
  import fp16_ref_pkg::*;

  function automatic int lanes(input prec_e p);
    case (p)
      PREC_INT2: return 16;
      PREC_INT4: return 8;
      PREC_INT8: return 4;
      default:   return 1;
    endcase
  endfunction

  function automatic logic [63:0] ref_mul(input prec_e p, input logic [31:0] a, input logic [31:0] b);
    logic [63:0] r;
    int n, iw, ow;
    r = '0;
    if (p == PREC_FP16) return {48'd0, fp16_ref_pkg::ref_mul(a[15:0], b[15:0])};
    if (p == PREC_INT16) return 64'(longint'(signed'(a[15:0])) * longint'(signed'(b[15:0])));
    n  = lanes(p);
    iw = 32 / n;
    ow = 64 / n;
    for (int l = 0; l < n; l++) begin
      longint av, bv, pr;
      av = longint'(a >> (iw * l)) & ((64'd1 << iw) - 1);
      bv = longint'(b >> (iw * l)) & ((64'd1 << iw) - 1);
      if (av >= (64'd1 << (iw - 1))) av -= (64'd1 << iw);
      if (bv >= (64'd1 << (iw - 1))) bv -= (64'd1 << iw);
      pr = av * bv;
      for (int k = 0; k < ow; k++) r[ow * l + k] = pr[k];
    end
    return r;
  endfunction

  function automatic logic [63:0] ref_add(input prec_e p, input logic [63:0] a, input logic [63:0] b);
    logic [63:0] r;
    int n, w;
    if (p == PREC_FP16) return {48'd0, fp16_ref_pkg::ref_add(a[15:0], b[15:0])};
    if (p == PREC_INT16) return 64'(longint'(signed'(32'(a[31:0] + b[31:0]))));
    n = lanes(p);
    w = 64 / n;
    r = '0;
    for (int l = 0; l < n; l++) begin
      logic [63:0] s;
      s = (a >> (w * l)) + (b >> (w * l));
      for (int k = 0; k < w; k++) r[w * l + k] = s[k];
    end
    return r;
  endfunction

  function automatic logic [63:0] ref_mac(input prec_e p, input logic [63:0] acc,
                                          input logic [31:0] a, input logic [31:0] b);
    return ref_add(p, acc, ref_mul(p, a, b));
  endfunction

  // random operand word packed for precision p (FP16 with a moderate exponent range)
  function automatic logic [31:0] rand_op(input prec_e p);
    if (p == PREC_FP16)  return {16'd0, rand_fp16(10, 20)};
    if (p == PREC_INT16) return {16'd0, 16'($urandom)};
    return $urandom;
  endfunction

  function automatic bit y_eq(input prec_e p, input logic [63:0] a, input logic [63:0] b);
    if (p == PREC_FP16) return (a[63:16] == b[63:16]) && fp16_eq(a[15:0], b[15:0]);
    return a == b;
  endfunction
endpackage

// ps_multiplier: precision-scalable multiplier of the PE.
//
// A slicer cuts OpA (X) and OpB (W) according to precision_sel and feeds
//   - one 16-bit multiplier, shared by INT16 and by the FP16 mantissa product. It is built
//     17x17 signed so it takes both sign-extended INT16 operands and the 11-bit unsigned
//     FP16 significands (hidden bit included). This sharing is the paper's FP16 multiplier
//     reuse; on an FPGA it is the part meant for a DSP block.
//   - the FP16 side path: sign XOR, exponent adder, normalise/exponent adjust, pack
//     (round to nearest even, subnormals flushed to zero, overflow to infinity, NaN 0x7E00;
//     these corner-case rules are this design's own).
//   - four 8-bit precision-scalable multiplier trees (mul_tree8) for INT8/INT4/INT2 lanes.
// The output mux selects a 64-bit word:
//   INT16 : 32-bit product sign-extended to 64 bits
//   FP16  : FP16 product in [15:0], upper bits zero
//   INT8  : four 16-bit lane products;  INT4: eight 8-bit;  INT2: sixteen 4-bit (lane 0 lowest)
// Operands are packed as in the paper: INT16/FP16 in [15:0], else 4/8/16 lanes in 32 bits.
// Fully combinational; the PE registers its output.
module ps_multiplier
  import ps_pkg::*;
(
  input  prec_e       prec,
  input  logic [31:0] op_a,
  input  logic [31:0] op_b,
  output logic [63:0] out
);
  // ---------------- slicer and shared 16-bit multiplier ----------------
  logic               fp;
  logic               a_s, b_s;
  logic        [4:0]  a_e, b_e;
  logic        [9:0]  a_f, b_f;
  logic signed [16:0] m_a, m_b;
  logic signed [33:0] m_p;

  always_comb begin
    fp  = (prec == PREC_FP16);
    {a_s, a_e, a_f} = op_a[15:0];
    {b_s, b_e, b_f} = op_b[15:0];
    m_a = fp ? {6'd0, 1'b1, a_f} : {op_a[15], op_a[15:0]};
    m_b = fp ? {6'd0, 1'b1, b_f} : {op_b[15], op_b[15:0]};
    m_p = 34'(m_a) * 34'(m_b);
  end

  // ---------------- FP16 sign / exponent / normalise / pack ----------------
  logic [15:0] fp_res;
  always_comb begin
    logic        s;
    logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
    logic [21:0] prod;
    logic signed [8:0] e;
    logic [10:0] sig;
    logic [2:0]  grs;
    s      = a_s ^ b_s;
    a_zero = (a_e == 5'd0);
    b_zero = (b_e == 5'd0);
    a_inf  = (a_e == 5'h1F) && (a_f == 10'd0);
    b_inf  = (b_e == 5'h1F) && (b_f == 10'd0);
    a_nan  = (a_e == 5'h1F) && (a_f != 10'd0);
    b_nan  = (b_e == 5'h1F) && (b_f != 10'd0);
    prod   = m_p[21:0];
    e      = 9'(a_e) + 9'(b_e) - 9'sd15;
    if (prod[21]) begin
      sig = prod[21:11];
      grs = {prod[10], prod[9], |prod[8:0]};
      e   = e + 9'sd1;
    end else begin
      sig = prod[20:10];
      grs = {prod[9], prod[8], |prod[7:0]};
    end
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) fp_res = FP16_QNAN;
    else if (a_inf || b_inf)                                      fp_res = {s, 5'h1F, 10'd0};
    else if (a_zero || b_zero)                                    fp_res = {s, 15'd0};
    else                                                          fp_res = fp16_round_pack(s, e, sig, grs);
  end

  // ---------------- four 8-bit multiplier trees ----------------
  logic [15:0] tree_p [4];
  for (genvar t = 0; t < 4; t++) begin : g_tree
    mul_tree8 u_tree (.x(op_a[8*t +: 8]), .w(op_b[8*t +: 8]), .prec(prec), .p(tree_p[t]));
  end

  // ---------------- output mux ----------------
  always_comb begin
    unique case (prec)
      PREC_FP16:  out = {48'd0, fp_res};
      PREC_INT16: out = 64'(signed'(m_p[31:0]));
      default:    out = {tree_p[3], tree_p[2], tree_p[1], tree_p[0]};
    endcase
  end
endmodule

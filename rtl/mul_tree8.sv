// mul_tree8: 8-bit precision-scalable multiplier tree.
//
// Four 4-bit trees (mul_tree4) and one adder, one level up from mul_tree4 with the same
// structure. INT8: one signed 8x8 product from four nibble products,
//   TL = Xh*Wh << 8,  BL = Xh*Wl << 4,  TR = Xl*Wh << 4,  BR = Xl*Wl  (p = 16-bit product).
// INT4: the two right-hand trees compute the two INT4 lanes (TR = X[7:4]*W[7:4] << 8,
// BR = X[3:0]*W[3:0]); p = {lane1[7:0], lane0[7:0]}.
// INT2: the same two trees run in split mode; p = four 4-bit lane products, lane 0 lowest.
// In INT4/INT2 the left-hand trees are gated to zero, as the paper's figure caption says only
// half of the 4-bit trees are reused so that the output stays 16 bits wide. Combinational.
// Any other precision_sel value is treated as INT8.
module mul_tree8
  import ps_pkg::*;
(
  input  logic [7:0]  x,
  input  logic [7:0]  w,
  input  prec_e       prec,
  output logic [15:0] p
);
  logic split8, split4;
  logic [3:0] tl_x, tl_w, bl_x, bl_w, tr_x, tr_w, br_x, br_w;
  logic signed [9:0] p_tl, p_bl, p_tr, p_br;

  always_comb begin
    split8 = (prec == PREC_INT4) || (prec == PREC_INT2);
    split4 = (prec == PREC_INT2);
    tl_x = split8 ? 4'd0 : x[7:4];
    tl_w = split8 ? 4'd0 : w[7:4];
    bl_x = split8 ? 4'd0 : x[7:4];
    bl_w = split8 ? 4'd0 : w[3:0];
    tr_x = split8 ? x[7:4] : x[3:0];
    tr_w = w[7:4];
    br_x = x[3:0];
    br_w = w[3:0];
  end

  mul_tree4 u_tl (.x(tl_x), .w(tl_w), .x_sgn(1'b1),   .w_sgn(1'b1),   .split(1'b0),   .p(p_tl));
  mul_tree4 u_bl (.x(bl_x), .w(bl_w), .x_sgn(1'b1),   .w_sgn(1'b0),   .split(1'b0),   .p(p_bl));
  mul_tree4 u_tr (.x(tr_x), .w(tr_w), .x_sgn(split8), .w_sgn(1'b1),   .split(split4), .p(p_tr));
  mul_tree4 u_br (.x(br_x), .w(br_w), .x_sgn(split8), .w_sgn(split8), .split(split4), .p(p_br));

  always_comb begin
    if (split8)
      p = {p_tr[7:0], p_br[7:0]};
    else
      p = (16'(p_tl) <<< 8) + (16'(p_bl) <<< 4) + (16'(p_tr) <<< 4) + 16'(p_br);
  end
endmodule

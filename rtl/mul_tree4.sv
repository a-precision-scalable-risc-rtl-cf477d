// mul_tree4: 4-bit precision-scalable multiplier tree.
//
// Four 2-bit multipliers (mul2) and one adder. In full mode (split=0) the 4-bit operands are
// cut into a high and a low 2-bit field and the four partial products are shifted and added:
//   TL = Xh*Wh << 4,  BL = Xh*Wl << 2,  TR = Xl*Wh << 2,  BR = Xl*Wl.
// x_sgn / w_sgn say whether the operand is signed (then its high field is sign-extended);
// the low fields are always unsigned. The 10-bit result is the exact product for any
// signed/unsigned mix. In split mode the nibbles hold two INT2 lanes each: the operand muxes
// of the two right-hand multipliers switch to the lane operands (TR = X2*W2 << 4,
// BR = X1*W1), the left-hand multipliers are gated to zero and each lane product is cut to
// 4 bits, so p[7:0] = {X2*W2, X1*W1} as two 4-bit lanes. Combinational.
// The multiplier count, the shifts and the two operand muxes follow the paper's figure;
// the 4-bit truncation in split mode and the signedness handling are this design's choice.
module mul_tree4 (
  input  logic [3:0]        x,
  input  logic [3:0]        w,
  input  logic              x_sgn,
  input  logic              w_sgn,
  input  logic              split,
  output logic signed [9:0] p
);
  logic signed [2:0] xh, wh, xl, wl, tr_x, tr_w, br_x, br_w, tl_x, tl_w, bl_x, bl_w;
  logic signed [5:0] p_tl, p_bl, p_tr, p_br;

  always_comb begin
    xh = {x_sgn & x[3], x[3:2]};
    wh = {w_sgn & w[3], w[3:2]};
    xl = {1'b0, x[1:0]};
    wl = {1'b0, w[1:0]};
    // left multipliers: only used in full mode
    tl_x = split ? 3'sd0 : xh;
    tl_w = split ? 3'sd0 : wh;
    bl_x = split ? 3'sd0 : xh;
    bl_w = split ? 3'sd0 : wl;
    // right multipliers: operand muxes (lane operands X2/W2 and X1/W1 in split mode)
    tr_x = split ? {x[3], x[3:2]} : xl;
    tr_w = split ? {w[3], w[3:2]} : wh;
    br_x = split ? {x[1], x[1:0]} : xl;
    br_w = split ? {w[1], w[1:0]} : wl;
  end

  mul2 u_tl (.a(tl_x), .b(tl_w), .p(p_tl));
  mul2 u_bl (.a(bl_x), .b(bl_w), .p(p_bl));
  mul2 u_tr (.a(tr_x), .b(tr_w), .p(p_tr));
  mul2 u_br (.a(br_x), .b(br_w), .p(p_br));

  always_comb begin
    if (split)
      p = (10'(p_tr[3:0]) << 4) + 10'(p_br[3:0]);
    else
      p = (10'(p_tl) <<< 4) + (10'(p_bl) <<< 2) + (10'(p_tr) <<< 2) + 10'(p_br);
  end
endmodule

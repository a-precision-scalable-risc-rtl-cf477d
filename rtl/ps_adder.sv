// ps_adder: precision-scalable adder of the PE (accumulation Y + product).
//
// As in the paper the adder is not shared between precisions: it holds one FP16 adder,
// one 32-bit adder, four 16-bit, eight 8-bit and sixteen 4-bit adders working in parallel,
// and precision_sel picks one group's concatenated result:
//   FP16 : fp16_adder on [15:0], upper bits zero
//   INT16: 32-bit adder on [31:0], sign-extended to 64 bits
//   INT8 : four 16-bit lanes; INT4: eight 8-bit lanes; INT2: sixteen 4-bit lanes
// Lanes wrap on overflow (the paper gives no saturation). On an FPGA the integer adders are
// the part meant for DSP blocks and the FP16 adder for LUTs. Combinational.
module ps_adder
  import ps_pkg::*;
(
  input  prec_e       prec,
  input  logic [63:0] op_a,
  input  logic [63:0] op_b,
  output logic [63:0] out
);
  logic [15:0] fp_sum;
  logic [31:0] add32;
  logic [63:0] add16, add8, add4;

  fp16_adder u_fp (.a(op_a[15:0]), .b(op_b[15:0]), .s(fp_sum));

  always_comb begin
    add32 = op_a[31:0] + op_b[31:0];
    for (int i = 0; i < 4; i++)  add16[16*i +: 16] = op_a[16*i +: 16] + op_b[16*i +: 16];
    for (int i = 0; i < 8; i++)  add8[8*i +: 8]    = op_a[8*i +: 8] + op_b[8*i +: 8];
    for (int i = 0; i < 16; i++) add4[4*i +: 4]    = op_a[4*i +: 4] + op_b[4*i +: 4];
  end

  always_comb begin
    unique case (prec)
      PREC_FP16:  out = {48'd0, fp_sum};
      PREC_INT16: out = 64'(signed'(add32));
      PREC_INT8:  out = add16;
      PREC_INT4:  out = add8;
      default:    out = add4;
    endcase
  end
endmodule

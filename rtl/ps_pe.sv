// ps_pe: precision-scalable processing element of the output-stationary systolic array.
//
// X (32 bits, one packed operand word) arrives from the left neighbour and W from the one
// above; both are registered and passed on right and down, each with a valid bit. The
// precision-scalable multiplier works on the registered X and W, its 64-bit result is
// registered (the register between multiplier and adder in the paper's PE drawing) and the
// precision-scalable adder adds it into the 64-bit accumulator Y when both operands were
// valid. In shift mode Y is not accumulated but loaded from the PE above (y_in) every cycle,
// so a column of PEs becomes a shift register that moves results down and out.
// Control, all synchronous:
//   clr   : Y, product and valid bits to zero (the constant-0 mux inputs of the figure)
//   shift : Y <= y_in (takes priority over en)
//   en    : advance the X/W/product pipeline (0 = whole array stalled)
// Timing: an operand pair registered at edge t is multiplied in the next cycle, its product
// registered at edge t+1 and accumulated at edge t+2. Asynchronous active-low reset.
module ps_pe
  import ps_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  prec_e       prec,
  input  logic        en,
  input  logic        clr,
  input  logic        shift,
  input  logic [31:0] x_in,
  input  logic        xv_in,
  input  logic [31:0] w_in,
  input  logic        wv_in,
  input  logic [63:0] y_in,
  output logic [31:0] x_out,
  output logic        xv_out,
  output logic [31:0] w_out,
  output logic        wv_out,
  output logic [63:0] y_out
);
  logic [31:0] x_q, w_q;
  logic        xv_q, wv_q, pv_q;
  logic [63:0] p_d, p_q, s_d, y_q;

  ps_multiplier u_mul (.prec(prec), .op_a(x_q), .op_b(w_q), .out(p_d));
  ps_adder      u_add (.prec(prec), .op_a(y_q), .op_b(p_q), .out(s_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0; w_q <= '0; xv_q <= 1'b0; wv_q <= 1'b0;
      p_q <= '0; pv_q <= 1'b0; y_q <= '0;
    end else if (clr) begin
      xv_q <= 1'b0; wv_q <= 1'b0; pv_q <= 1'b0;
      p_q  <= '0;   y_q  <= '0;
    end else if (shift) begin
      y_q <= y_in;
    end else if (en) begin
      x_q  <= x_in;
      xv_q <= xv_in;
      w_q  <= w_in;
      wv_q <= wv_in;
      p_q  <= p_d;
      pv_q <= xv_q & wv_q;
      if (pv_q) y_q <= s_d;
    end
  end

  assign x_out  = x_q;
  assign xv_out = xv_q;
  assign w_out  = w_q;
  assign wv_out = wv_q;
  assign y_out  = y_q;
endmodule

// ps_pkg: types and constants shared by the precision-scalable DNN co-processor.
//
// prec_e is the precision_sel signal that every arithmetic block receives. The five
// precisions and the way operands are packed into a 32-bit word (one FP16 or INT16 in
// bits [15:0] with the upper half zero, four INT8, eight INT4 or sixteen INT2 lanes, lane 0
// in the least significant bits) follow the paper; the numeric encoding is this design's own.
// The register offsets of the control slave stand for the six co-processor instructions
// (setup, xaddr, waddr, len, load, store); the offsets themselves are chosen here.
package ps_pkg;

  typedef enum logic [2:0] {
    PREC_INT2  = 3'd0,
    PREC_INT4  = 3'd1,
    PREC_INT8  = 3'd2,
    PREC_INT16 = 3'd3,
    PREC_FP16  = 3'd4
  } prec_e;

  // Control-slave register offsets (word index).
  localparam logic [2:0] REG_SETUP  = 3'd0;  // wdata[2:0] = precision, clears accumulators
  localparam logic [2:0] REG_XADDR  = 3'd1;  // byte address of A
  localparam logic [2:0] REG_WADDR  = 3'd2;  // byte address of B
  localparam logic [2:0] REG_LEN    = 3'd3;  // K, number of vectors streamed per operand
  localparam logic [2:0] REG_LOAD   = 3'd4;  // any write: stream A and B through the array
  localparam logic [2:0] REG_STORE  = 3'd5;  // wdata = byte address for the results; drains Y
  localparam logic [2:0] REG_STATUS = 3'd6;  // read: bit 0 busy, bits [2:0] of SETUP in [6:4]

  localparam logic [15:0] FP16_QNAN = 16'h7E00;

  // Round a normalised significand to nearest even and pack it as FP16.
  // sig: 1.xxxxxxxxxx followed by extra bits (12-bit guard field gr, the last bit sticky).
  // exp: biased exponent before rounding (may be out of range).
  function automatic logic [15:0] fp16_round_pack(input logic sign, input logic signed [8:0] exp,
                                                   input logic [10:0] sig, input logic [2:0] grs);
    logic        rnd;
    logic [11:0] m;
    logic signed [8:0] e;
    rnd = grs[2] & (grs[1] | grs[0] | sig[0]);
    m   = {1'b0, sig} + {11'd0, rnd};
    e   = exp;
    if (m[11]) begin
      m = m >> 1;
      e = e + 9'sd1;
    end
    if (e >= 9'sd31)     return {sign, 5'h1F, 10'd0};   // overflow: infinity
    else if (e <= 9'sd0) return {sign, 15'd0};          // underflow: flush to zero
    else                 return {sign, e[4:0], m[9:0]};
  endfunction

endpackage

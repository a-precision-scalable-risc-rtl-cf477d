// mul2: the 2-bit multiplier leaf of the 4-bit multiplier tree.
//
// Each 2-bit field of an operand arrives extended by one bit to a 3-bit two's-complement
// value (the sign for a signed field, 0 for an unsigned low field), so one signed 3x3
// multiplier covers every signed/unsigned combination the trees need. The 6-bit product is
// exact. Purely combinational. The 3-bit operand width matches the 3-bit fields X[2:0]
// printed in the paper's multiplier-tree figure; the extension rule is this design's own.
module mul2 (
  input  logic signed [2:0] a,
  input  logic signed [2:0] b,
  output logic signed [5:0] p
);
  always_comb p = 6'(a) * 6'(b);
endmodule

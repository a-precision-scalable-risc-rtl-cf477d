// tb_coprocessor_full: the same end-to-end test with the co-processor at its default size
// (12x12 array, two 384-bit memory ports): one pass over all five precisions, without memory
// stalls, with K up to 24.
module tb_coprocessor_full;
  localparam int N = 12;
  localparam int NRUN = 1;
  localparam int KMAX = 24;
  coprocessor dut (.*);
  `include "coproc_tb_body.svh"
endmodule

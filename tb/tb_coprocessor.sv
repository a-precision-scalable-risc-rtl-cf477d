// tb_coprocessor: end-to-end test of the co-processor with a 4x4 array (N reduced to keep
// the run short): for every precision SETUP, two accumulating LOADs and a STORE, with and
// without memory stalls, results checked word by word against the reference. Counts the
// stall, back-pressure, dual-port fetch and mode mechanisms and fails if one never occurred.
// Also checks the cycle count of an unstalled LOAD: K + 2N + 4 (from the LOAD write to the done event).
module tb_coprocessor;
  localparam int N = 4;
  localparam int NRUN = 3;
  localparam int KMAX = 12;
  coprocessor #(.N(N)) dut (.*);
  `include "coproc_tb_body.svh"
endmodule

// tb_systolic_array: a 4x4 array (N overridden to keep the run short) computes
// Y = A * B for random packed operands in all five precisions, with random stall cycles
// while feeding. Checks: every result after shift-out (bottom row first) against the lane
// reference; that K + 2N enabled cycles are enough (run without stalls); that K + 2N - 1
// are not (latency is exact); that the array is empty (zeros) after N shifts.
module tb_systolic_array;
  import ps_pkg::*;
  import fp16_ref_pkg::*;
  import ps_ref_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  prec_e prec;
  logic en, clr, shift, a_vld, b_vld;
  logic [N*32-1:0] a_col, b_row;
  logic [N*64-1:0] y_bot;
  logic [31:0] A [N][16];
  logic [31:0] B [16][N];
  logic [63:0] Y [N][N];
  int checks = 0, failures = 0, stalls = 0;

  systolic_array #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one product with K steps; flush = number of enabled cycles after the last step
  task automatic run(input int K, input int flush, input bit stall, input bit expect_ok);
    int bad;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int i = 0; i < N; i++)
      for (int k = 0; k < K; k++) A[i][k] = rand_op(prec);
    for (int k = 0; k < K; k++)
      for (int j = 0; j < N; j++) B[k][j] = rand_op(prec);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        Y[i][j] = '0;
        for (int k = 0; k < K; k++) Y[i][j] = ps_ref_pkg::ref_mac(prec, Y[i][j], A[i][k], B[k][j]);
      end
    for (int k = 0; k < K; k++) begin
      while (stall && ($urandom % 3 == 0)) begin
        en = 0; a_vld = 1; b_vld = 1; a_col = '1; b_row = '1; stalls++;
        @(negedge clk);
      end
      for (int i = 0; i < N; i++) a_col[32*i +: 32] = A[i][k];
      for (int j = 0; j < N; j++) b_row[32*j +: 32] = B[k][j];
      a_vld = 1; b_vld = 1; en = 1;
      @(negedge clk);
    end
    a_vld = 0; b_vld = 0;
    for (int c = 0; c < flush; c++) begin
      en = 1;
      @(negedge clk);
    end
    en = 0;
    bad = 0;
    shift = 1;
    for (int r = N - 1; r >= 0; r--) begin
      for (int j = 0; j < N; j++)
        if (!y_eq(prec, y_bot[64*j +: 64], Y[r][j])) begin
          bad++;
          if (expect_ok && failures < 10) $display("FAIL %s y[%0d][%0d]=%h exp=%h", prec.name(), r, j, y_bot[64*j +: 64], Y[r][j]);
        end
      @(negedge clk);
    end
    shift = 0;
    checks++;
    if (expect_ok ? (bad != 0) : (bad == 0)) failures++;
    checks++;
    if (y_bot != '0) failures++;
  endtask

  initial begin
    prec_e modes[5] = '{PREC_INT2, PREC_INT4, PREC_INT8, PREC_INT16, PREC_FP16};
    en = 0; clr = 0; shift = 0; a_vld = 0; b_vld = 0; a_col = '0; b_row = '0; prec = PREC_INT8;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (modes[m]) begin
      prec = modes[m];
      run(1 + $urandom % 8, 2 * N, 1'b1, 1'b1);
      run(8, 2 * N, 1'b0, 1'b1);
    end
    prec = PREC_INT16;
    run(8, 2 * N - 1, 1'b0, 1'b0);
    checks++;
    if (stalls == 0) failures++;
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

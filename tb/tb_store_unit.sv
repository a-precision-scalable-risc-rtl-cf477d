// tb_store_unit: N = 4 rows of 64-bit results are pushed into the output FIFO in drain
// order (row N-1 first); the store unit writes them to a memory model with random grant
// stalls. Checks every written word and its address against the layout
// word(base + 8*N*i + 8*j) = Y[i][j] low, +4 = high, and the done pulse.
module tb_store_unit;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, fifo_empty, fifo_pop, req, gnt, push, full;
  logic [31:0] base, addr;
  logic [N*64-1:0] fifo_dout, din;
  logic [N*32-1:0] wdata;
  logic [2:0] free;
  logic [63:0] Y [N][N];
  logic [31:0] memw [int];
  int checks = 0, failures = 0, dones = 0, stalls = 0;

  store_unit #(.N(N)) dut (.*);
  sync_fifo #(.W(N*64), .DEPTH(4)) u_fifo (.clk, .rst_n, .push, .din, .pop(fifo_pop), .dout(fifo_dout),
                                          .full, .empty(fifo_empty), .free);
  always #5 clk = ~clk;
  initial gnt = 1;
  always @(negedge clk) gnt <= ($urandom % 3 != 0);
  always_ff @(posedge clk) begin
    if (req && gnt)
      for (int w = 0; w < N; w++) memw[int'(addr) + 4 * w] = wdata[32*w +: 32];
    if (req && !gnt) stalls++;
    if (done) dones++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; push = 0; din = '0; base = 32'h400;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) Y[i][j] = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int r = N - 1; r >= 0; r--) begin
      while (full) @(negedge clk);
      for (int j = 0; j < N; j++) din[64*j +: 64] = Y[r][j];
      push = 1; @(negedge clk); push = 0;
      repeat ($urandom % 3) @(negedge clk);
    end
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        int a;
        a = int'(base) + 8 * N * i + 8 * j;
        checks++;
        if (!memw.exists(a) || !memw.exists(a + 4) || {memw[a + 4], memw[a]} != Y[i][j]) begin
          failures++;
          if (failures < 5) $display("FAIL Y[%0d][%0d]", i, j);
        end
      end
    checks++;
    if (dones != 1 || stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

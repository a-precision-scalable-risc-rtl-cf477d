// tb_sync_fifo: random push/pop traffic against a queue model; checks order, data, the
// full/empty flags and the free count, and that the FIFO fills up and drains completely.
module tb_sync_fifo;
  localparam int W = 16, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [$clog2(DEPTH+1)-1:0] free;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0, fulls = 0, empties = 0;

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      checks++;
      if (full != (q.size() == DEPTH) || empty != (q.size() == 0) || int'(free) != DEPTH - q.size()) failures++;
      if (!empty) begin
        checks++;
        if (dout != q[0]) failures++;
      end
      fulls += full; empties += empty;
      // bias towards filling in the first half, draining in the second
      push = !full && ($urandom % 4 < ((c / 500) % 2 ? 1 : 3));
      pop  = !empty && ($urandom % 4 < ((c / 500) % 2 ? 3 : 1));
      din  = W'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    checks++;
    if (fulls == 0 || empties == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

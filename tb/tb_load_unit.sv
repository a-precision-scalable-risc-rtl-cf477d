// tb_load_unit: the load unit reads len vectors from a memory model with random grant
// stalls and one-cycle read latency into a FIFO that is drained at random. Checks the
// addresses (base + k*DW/8), the data order, that the FIFO never overflows (credit), the
// done pulse, and the zero-length job.
module tb_load_unit;
  localparam int DW = 64, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, req, gnt, rvalid, push, pop, full, empty;
  logic [31:0] base, addr;
  logic [15:0] len;
  logic [DW-1:0] rdata, push_data, dout;
  logic [$clog2(DEPTH+1)-1:0] fifo_free;
  int checks = 0, failures = 0, received = 0, next_k = 0, dones = 0, gstall = 0;

  load_unit #(.DW(DW), .DEPTH(DEPTH)) dut (.*);
  sync_fifo #(.W(DW), .DEPTH(DEPTH)) u_fifo (.clk, .rst_n, .push, .din(push_data), .pop, .dout,
                                             .full, .empty, .free(fifo_free));
  always #5 clk = ~clk;

  function automatic logic [DW-1:0] mem(input logic [31:0] a);
    return {a ^ 32'hA5A5_0000, ~a};
  endfunction

  // memory: random grant, data one cycle after grant
  always_ff @(posedge clk) begin
    rvalid <= req && gnt;
    rdata  <= mem(addr);
    if (req && gnt) begin
      checks++;
      if (addr != base + 32'(next_k * DW / 8)) failures++;
      next_k++;
    end
    if (push && full) failures++;
    if (done) dones++;
  end
  initial gnt = 1;
  always @(negedge clk) gnt <= ($urandom % 4 != 0);
  always_ff @(posedge clk) if (req && !gnt) gstall++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; base = 32'h1000; len = 0; pop = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int job = 0; job < 6; job++) begin
      @(negedge clk);
      base = 32'h1000 * (job + 1); len = 16'(job == 0 ? 0 : 3 + $urandom % 20);
      next_k = 0; received = 0; dones = 0;
      start = 1; @(negedge clk); start = 0;
      while (received < int'(len)) begin
        pop = !empty && ($urandom % 3 == 0);
        if (pop) begin
          checks++;
          if (dout != mem(base + 32'(received * DW / 8))) failures++;
          received++;
        end
        @(negedge clk);
        pop = 0;
      end
      repeat (3) @(negedge clk);
      checks++;
      if (dones != 1 || busy) failures++;
    end
    checks++;
    if (gstall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

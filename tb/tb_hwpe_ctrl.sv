// tb_hwpe_ctrl: the control slave and sequencer alone (N = 4), with the FIFO flags, the
// output-FIFO full flag and the store unit's done driven by the testbench. Checks the
// register writes, the clear pulse of SETUP, the start pulses, that a LOAD pops exactly LEN
// vector pairs and only when both FIFOs hold data, that it then runs exactly 2N flush
// cycles, that STORE shifts exactly N times and never into a full FIFO, that writes are
// refused while busy, the STATUS read and the done events.
module tb_hwpe_ctrl;
  import ps_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic cfg_req, cfg_we, cfg_gnt, cfg_rvalid;
  logic [2:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata, ld_xaddr, ld_waddr, st_base;
  logic [15:0] ld_len;
  logic ld_start, a_empty, b_empty, pop_ab, sa_en, sa_clr, sa_shift, sa_vld;
  logic y_full, y_push, st_start, st_done, busy, evt;
  prec_e prec;
  int checks = 0, failures = 0, pops = 0, flush = 0, shifts = 0, clrs = 0, evts = 0, refused = 0;
  logic loading = 1'b0;
  int stalls = 0, full_shift = 0, starts = 0;

  hwpe_ctrl #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  always @(negedge clk) begin
    a_empty <= ($urandom % 3 == 0);
    b_empty <= ($urandom % 3 == 0);
    y_full  <= ($urandom % 4 == 0);
  end
  always_ff @(posedge clk) if (rst_n) begin
    if (pop_ab) begin
      pops++;
      if (a_empty || b_empty) failures++;
    end
    if (sa_en && !pop_ab) flush++;
    if (loading && !sa_en) stalls++;
    if (ld_start) loading <= 1'b1;
    else if (evt) loading <= 1'b0;
    if (sa_shift) begin shifts++; if (y_full || !y_push) full_shift++; end
    if (sa_clr) clrs++;
    if (evt) evts++;
    if (ld_start || st_start) starts++;
  end

  task automatic wr(input logic [2:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_req = 1; cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    #1;
    while (!cfg_gnt) begin refused++; @(negedge clk); #1; end
    @(negedge clk);
    cfg_req = 0; cfg_we = 0;
  endtask

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_req = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; st_done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(REG_SETUP, 32'(PREC_INT4));
    wr(REG_XADDR, 32'h100);
    wr(REG_WADDR, 32'h200);
    wr(REG_LEN, 32'd7);
    chk(prec == PREC_INT4 && ld_xaddr == 32'h100 && ld_waddr == 32'h200 && ld_len == 16'd7, "registers");
    chk(clrs == 1, "setup clears once");
    wr(REG_LOAD, 0);
    wr(REG_LEN, 32'd9);      // refused until the LOAD has finished
    chk(refused > 0, "write refused while busy");
    chk(pops == 7 && flush == 2 * N, $sformatf("load pops=%0d flush=%0d", pops, flush));
    chk(evts == 1 && starts == 1, "load event");
    chk(stalls > 0, "stall cycles seen");
    // STATUS read
    @(negedge clk); cfg_req = 1; cfg_we = 0; cfg_addr = REG_STATUS; @(negedge clk); cfg_req = 0;
    chk(cfg_rvalid && cfg_rdata[0] == 1'b0 && cfg_rdata[6:4] == 3'(PREC_INT4), "status");
    wr(REG_STORE, 32'h800);
    chk(st_base == 32'h800 && busy, "store start");
    while (shifts < N) @(negedge clk);
    repeat (5) @(negedge clk);
    chk(shifts == N && full_shift == 0 && busy, "store shifts");
    st_done = 1; @(negedge clk); st_done = 0; @(negedge clk);
    chk(!busy && evts == 2, "store done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

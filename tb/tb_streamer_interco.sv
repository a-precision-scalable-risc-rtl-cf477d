// tb_streamer_interco: three requesters with random requests against two memory ports with
// random grants. Checks that port 1 carries exactly the W load unit, that port 0 grants at
// most one of the X load unit and the store unit and only one that asks, that each port
// carries its granted requester's address/we/data, that read data and rvalid reach the load
// unit of the port they came from, and that the port-0 arbiter alternates under contention.
module tb_streamer_interco;
  localparam int DW = 32;
  logic clk = 0, rst_n = 0;
  logic [2:0] s_req, s_we, s_gnt;
  logic [31:0] s_addr [3];
  logic [DW-1:0] s_wdata [3];
  logic [1:0] s_rvalid;
  logic [DW-1:0] s_rdata [2];
  logic [1:0] m_req, m_we, m_gnt, m_rvalid;
  logic [31:0] m_addr [2];
  logic [DW-1:0] m_wdata [2], m_rdata [2];
  int checks = 0, failures = 0, grants[3], both = 0, last = -1, repeats = 0;

  streamer_interco #(.DW(DW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_req = 0; m_gnt = 0; m_rvalid = 0;
    foreach (grants[i]) grants[i] = 0;
    for (int i = 0; i < 3; i++) begin s_addr[i] = 0; s_wdata[i] = 0; end
    m_rdata[0] = 0; m_rdata[1] = 0;
    s_we = 3'b100;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int i = 0; i < 3; i++) begin
        s_req[i] = ($urandom % 4 != 0);
        s_addr[i] = {8'(i), 24'($urandom)};
        s_wdata[i] = $urandom;
      end
      m_gnt = 2'($urandom);
      m_rvalid = 2'($urandom);
      m_rdata[0] = $urandom; m_rdata[1] = $urandom;
      #1;
      checks++;
      if (s_gnt[0] && s_gnt[2]) failures++;
      if ((s_gnt & ~s_req) != 0) failures++;
      if (m_req != {s_req[1], s_req[0] | s_req[2]}) failures++;
      if (s_gnt[1] != (s_req[1] && m_gnt[1])) failures++;
      if ((s_req[0] || s_req[2]) && m_gnt[0] && !(s_gnt[0] || s_gnt[2])) failures++;
      checks++;
      if (s_rvalid != m_rvalid || s_rdata[0] != m_rdata[0] || s_rdata[1] != m_rdata[1]) failures++;
      if (s_req[1]) begin
        checks++;
        if (m_addr[1] != s_addr[1] || m_we[1]) failures++;
      end
      for (int i = 0; i < 3; i += 2) if (s_gnt[i]) begin
        checks++;
        if (m_addr[0] != s_addr[i] || m_we[0] != s_we[i] || (s_we[i] && m_wdata[0] != s_wdata[i])) failures++;
        grants[i]++;
      end
      // under contention on port 0 the winner alternates
      if (s_req[0] && s_req[2] && m_gnt[0]) begin
        int now;
        now = s_gnt[2] ? 2 : 0;
        both++;
        if (now == last) repeats++;
        last = now;
      end else if (m_gnt[0] && (s_gnt[0] || s_gnt[2])) begin
        last = s_gnt[2] ? 2 : 0;
      end
      for (int i = 0; i < 3; i++) if (s_gnt[i]) grants[i]++;
    end
    checks++;
    if (grants[0] == 0 || grants[1] == 0 || grants[2] == 0 || both == 0 || repeats != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

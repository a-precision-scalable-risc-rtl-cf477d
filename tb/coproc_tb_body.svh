// Body shared by the end-to-end testbenches of the co-processor. The including module
// defines localparam N, NRUN (products per precision) and KMAX, and instantiates nothing.
// A core model writes the six commands to the register slave; the data memory model holds
// A, B and the results. For every precision: SETUP, two LOADs (the second accumulates on
// the first), STORE, then every stored word is compared with a lane-level reference.
  import ps_pkg::*;
  import fp16_ref_pkg::*;
  import ps_ref_pkg::*;

  localparam int DW = N * 32;
  logic clk = 0, rst_n = 0;
  logic cfg_req, cfg_we, cfg_gnt, cfg_rvalid, busy, evt;
  logic [1:0] mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [2:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [31:0] mem_addr [2];
  logic [DW-1:0] mem_wdata [2], mem_rdata [2];
  logic stall_en;
  int checks = 0, failures = 0;
  // mechanism counters
  int n_sa_stall = 0, n_mem_stall = 0, n_credit_stall = 0, n_yfull = 0, n_refused = 0;
  int n_mode[5] = '{0, 0, 0, 0, 0};
  int n_accum = 0, n_arb = 0, n_dual = 0;

  always #5 clk = ~clk;

  tcdm_model #(.DW(DW)) u_mem (.clk, .stall_en, .req(mem_req), .addr(mem_addr), .we(mem_we),
                               .wdata(mem_wdata), .gnt(mem_gnt), .rvalid(mem_rvalid), .rdata(mem_rdata));

  // mechanism monitors
  logic loading = 1'b0;
  always_ff @(posedge clk) begin
    if (dut.ld_start) loading <= 1'b1;
    else if (evt)     loading <= 1'b0;
    if (loading && !dut.sa_en) n_sa_stall++;
    if ((mem_req & ~mem_gnt) != 0) n_mem_stall++;
    if (dut.u_load_x.busy && dut.u_load_x.issued != dut.ld_len && !dut.s_req[0]) n_credit_stall++;
    if (dut.u_ctrl.state == 3'd4 && dut.y_full) n_yfull++;
    if (dut.s_req[0] && dut.s_req[2]) n_arb++;      // X load and store compete for port 0
    if ((mem_req & mem_gnt) == 2'b11) n_dual++;     // A and B fetched in the same cycle
  end

  task automatic wr(input logic [2:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_req = 1; cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    #1;
    while (!cfg_gnt) begin n_refused++; @(negedge clk); #1; end
    @(negedge clk);
    cfg_req = 0; cfg_we = 0;
  endtask

  task automatic wait_evt(output int cycles);
    cycles = 0;
    while (!evt) begin @(posedge clk); cycles++; end
    @(negedge clk);
  endtask

  logic [31:0] A [N][KMAX];
  logic [31:0] B [KMAX][N];
  logic [63:0] Y [N][N];

  // place A (column-major vectors) and B (row vectors) in memory and fold them into Y
  task automatic make_operands(input prec_e p, input int K, input int xw, input int ww);
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < N; i++) begin
        A[i][k] = rand_op(p);
        if (p == PREC_FP16) A[i][k] = {16'd0, rand_fp16(12, 16)};
        u_mem.mem[xw + k * N + i] = A[i][k];
      end
      for (int j = 0; j < N; j++) begin
        B[k][j] = rand_op(p);
        if (p == PREC_FP16) B[k][j] = {16'd0, rand_fp16(12, 16)};
        u_mem.mem[ww + k * N + j] = B[k][j];
      end
    end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        for (int k = 0; k < K; k++) Y[i][j] = ps_ref_pkg::ref_mac(p, Y[i][j], A[i][k], B[k][j]);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prec_e modes[5] = '{PREC_INT8, PREC_INT4, PREC_INT2, PREC_INT16, PREC_FP16};
    int cyc, ld_cyc, st_cyc;
    cfg_req = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; stall_en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < NRUN; run++) begin
      foreach (modes[m]) begin
        prec_e p;
        int K1, K2, xw, ww, yw, bad;
        p = modes[m];
        stall_en = (run % 2 == 1);
        K1 = (run == 0) ? KMAX : 1 + int'($urandom % KMAX);
        K2 = 1 + int'($urandom % KMAX);
        xw = 0; ww = 2 * N * KMAX; yw = 4 * N * KMAX;
        for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) Y[i][j] = '0;
        wr(REG_SETUP, 32'(p));
        n_mode[m]++;
        // first LOAD
        make_operands(p, K1, xw, ww);
        wr(REG_XADDR, 32'(4 * xw));
        wr(REG_WADDR, 32'(4 * ww));
        wr(REG_LEN, 32'(K1));
        wr(REG_LOAD, 0);
        wait_evt(ld_cyc);
        // second LOAD accumulates on the first
        make_operands(p, K2, xw + N * KMAX, ww + N * KMAX);
        wr(REG_XADDR, 32'(4 * (xw + N * KMAX)));
        wr(REG_WADDR, 32'(4 * (ww + N * KMAX)));
        wr(REG_LEN, 32'(K2));
        wr(REG_LOAD, 0);
        wr(REG_STORE, 32'(4 * yw));      // refused while the LOAD runs, then accepted
        n_accum++;
        wait_evt(st_cyc);
        bad = 0;
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++) begin
            logic [63:0] got;
            got = {u_mem.mem[yw + 2 * N * i + 2 * j + 1], u_mem.mem[yw + 2 * N * i + 2 * j]};
            checks++;
            if (!y_eq(p, got, Y[i][j])) begin
              failures++; bad++;
              if (failures < 8) $display("FAIL %s run %0d Y[%0d][%0d]=%h exp=%h", p.name(), run, i, j, got, Y[i][j]);
            end
          end
        if (run == 0) begin
          // no memory stalls in run 0: the first LOAD has a fixed length
          $display("%s: LOAD of K=%0d took %0d cycles, STORE %0d cycles", p.name(), K1, ld_cyc, st_cyc);
          checks++;
          if (ld_cyc != K1 + 2 * N + 4) begin
            failures++;
            $display("FAIL load cycles %0d, expected %0d", ld_cyc, K1 + 2 * N + 4);
          end
        end
      end
    end
    $display("mechanisms: sa_stall=%0d mem_stall=%0d credit_stall=%0d yfifo_full=%0d cmd_refused=%0d accumulate=%0d port0_conflicts=%0d dual_port_fetch=%0d",
             n_sa_stall, n_mem_stall, n_credit_stall, n_yfull, n_refused, n_accum, n_arb, n_dual);
    $display("precision runs: INT8=%0d INT4=%0d INT2=%0d INT16=%0d FP16=%0d", n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_mode[4]);
    foreach (n_mode[m]) begin checks++; if (n_mode[m] == 0) failures++; end
    checks++; if (n_sa_stall == 0)     failures++;
    checks++; if (n_mem_stall == 0 && NRUN > 1) failures++;
    checks++; if (n_credit_stall == 0 && NRUN > 1) failures++;
    checks++; if (n_yfull == 0)        failures++;
    checks++; if (n_refused == 0)      failures++;
    checks++; if (n_dual == 0)         failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

// coprocessor: precision-scalable DNN co-processor, tightly coupled to a RISC-V cluster.
//
// The cores program it through a small register slave (hwpe_ctrl) and it reaches the
// cluster's shared data memory through two master ports of N 32-bit words each. Inside:
//   - two load units fetch A (column by column) and B (row by row) into two FIFOs,
//   - an N x N output-stationary systolic array of precision-scalable PEs multiplies them
//     (INT2/INT4/INT8/INT16 lanes for inference, FP16 for on-device learning),
//   - on STORE the array shifts its 64-bit results down into a third FIFO and the store
//     unit writes them out,
//   - the streamer interconnect gives the B reads a port of their own and lets the A reads
//     and the result writes share the other, so both operand streams run at full rate.
// One LOAD computes Y += A * B for an N x K by K x N pair of packed-operand matrices; each
// operand word holds 1, 4, 8 or 16 independent lanes, so one LOAD performs that many
// independent matrix products. Memory layout (byte addresses, 32-bit words):
//   A: K vectors of N words, vector k = column k of A (word i = A[i][k])
//   B: K vectors of N words, vector k = row k of B    (word j = B[k][j])
//   Y: row i at base + 8*N*i, Y[i][j] as two words (low, high) at word 2j, 2j+1
// Memory ports: req/gnt handshake, read data with rvalid in order after the grant.
// The block structure follows the paper's co-processor diagram; sizes other than N, the
// memory layout and the port protocol are this design's own.
module coprocessor
  import ps_pkg::*;
#(
  parameter int unsigned N          = 12,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // register slave (from the cores through the peripheral interconnect)
  input  logic              cfg_req,
  input  logic              cfg_we,
  input  logic [2:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic              cfg_gnt,
  output logic              cfg_rvalid,
  output logic [31:0]       cfg_rdata,
  // two memory master ports (to the cluster interconnect / shared data memory):
  // port 0 carries the A reads and the result writes, port 1 the B reads
  output logic [1:0]        mem_req,
  output logic [31:0]       mem_addr  [2],
  output logic [1:0]        mem_we,
  output logic [N*32-1:0]   mem_wdata [2],
  input  logic [1:0]        mem_gnt,
  input  logic [1:0]        mem_rvalid,
  input  logic [N*32-1:0]   mem_rdata [2],
  // status
  output logic              busy,
  output logic              evt
);
  localparam int unsigned DW = N * 32;
  localparam int unsigned FW = $clog2(FIFO_DEPTH + 1);

  prec_e         prec;
  logic          ld_start, pop_ab, sa_en, sa_clr, sa_shift, sa_vld, y_push, st_start, st_done;
  logic [31:0]   ld_xaddr, ld_waddr, st_base;
  logic [15:0]   ld_len;
  logic          a_empty, b_empty, a_full, b_full, y_full, y_empty, y_pop;
  logic [FW-1:0] a_free, b_free, y_free;
  logic [DW-1:0] a_dout, b_dout, a_din, b_din;
  logic [2*DW-1:0] y_bot, y_dout;
  logic          a_push, b_push;

  // streamer signals
  logic [2:0]    s_req, s_we, s_gnt;
  logic [31:0]   s_addr  [3];
  logic [DW-1:0] s_wdata [3];
  logic [1:0]    s_rvalid;
  logic [DW-1:0] s_rdata [2];
  logic          ldx_busy, ldx_done, ldw_busy, ldw_done, st_busy;

  hwpe_ctrl #(.N(N)) u_ctrl (
    .clk, .rst_n,
    .cfg_req, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_gnt, .cfg_rvalid, .cfg_rdata,
    .ld_start, .ld_xaddr, .ld_waddr, .ld_len, .a_empty, .b_empty, .pop_ab,
    .prec, .sa_en, .sa_clr, .sa_shift, .sa_vld,
    .y_full, .y_push, .st_start, .st_base, .st_done,
    .busy, .evt
  );

  load_unit #(.DW(DW), .DEPTH(FIFO_DEPTH)) u_load_x (
    .clk, .rst_n, .start(ld_start), .base(ld_xaddr), .len(ld_len), .busy(ldx_busy), .done(ldx_done),
    .req(s_req[0]), .addr(s_addr[0]), .gnt(s_gnt[0]), .rvalid(s_rvalid[0]), .rdata(s_rdata[0]),
    .fifo_free(a_free), .push(a_push), .push_data(a_din)
  );
  load_unit #(.DW(DW), .DEPTH(FIFO_DEPTH)) u_load_w (
    .clk, .rst_n, .start(ld_start), .base(ld_waddr), .len(ld_len), .busy(ldw_busy), .done(ldw_done),
    .req(s_req[1]), .addr(s_addr[1]), .gnt(s_gnt[1]), .rvalid(s_rvalid[1]), .rdata(s_rdata[1]),
    .fifo_free(b_free), .push(b_push), .push_data(b_din)
  );
  assign s_we[0] = 1'b0;
  assign s_we[1] = 1'b0;
  assign s_wdata[0] = '0;
  assign s_wdata[1] = '0;

  sync_fifo #(.W(DW), .DEPTH(FIFO_DEPTH)) u_fifo_a (
    .clk, .rst_n, .push(a_push), .din(a_din), .pop(pop_ab), .dout(a_dout),
    .full(a_full), .empty(a_empty), .free(a_free)
  );
  sync_fifo #(.W(DW), .DEPTH(FIFO_DEPTH)) u_fifo_b (
    .clk, .rst_n, .push(b_push), .din(b_din), .pop(pop_ab), .dout(b_dout),
    .full(b_full), .empty(b_empty), .free(b_free)
  );

  systolic_array #(.N(N)) u_sa (
    .clk, .rst_n, .prec, .en(sa_en), .clr(sa_clr), .shift(sa_shift),
    .a_col(a_dout), .a_vld(sa_vld), .b_row(b_dout), .b_vld(sa_vld), .y_bot
  );

  sync_fifo #(.W(2*DW), .DEPTH(FIFO_DEPTH)) u_fifo_y (
    .clk, .rst_n, .push(y_push), .din(y_bot), .pop(y_pop), .dout(y_dout),
    .full(y_full), .empty(y_empty), .free(y_free)
  );

  store_unit #(.N(N)) u_store (
    .clk, .rst_n, .start(st_start), .base(st_base), .busy(st_busy), .done(st_done),
    .fifo_empty(y_empty), .fifo_dout(y_dout), .fifo_pop(y_pop),
    .req(s_req[2]), .addr(s_addr[2]), .wdata(s_wdata[2]), .gnt(s_gnt[2])
  );
  assign s_we[2] = 1'b1;

  streamer_interco #(.DW(DW)) u_interco (
    .clk, .rst_n,
    .s_req, .s_addr, .s_we, .s_wdata, .s_gnt, .s_rvalid, .s_rdata,
    .m_req(mem_req), .m_addr(mem_addr), .m_we(mem_we), .m_wdata(mem_wdata),
    .m_gnt(mem_gnt), .m_rvalid(mem_rvalid), .m_rdata(mem_rdata)
  );
endmodule

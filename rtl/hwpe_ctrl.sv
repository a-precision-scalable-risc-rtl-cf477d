// hwpe_ctrl: control slave and sequencer of the co-processor.
//
// The cluster cores drive the co-processor with six instructions; here each is a write to
// one register of a small peripheral slave (offsets in ps_pkg):
//   SETUP  precision_sel in wdata[2:0]; also clears all accumulators (one cycle)
//   XADDR  first address of A           WADDR  first address of B
//   LEN    K, number of A columns / B rows streamed by one LOAD
//   LOAD   starts both load units and streams K vector pairs through the array; the
//          products are added to what the accumulators already hold
//   STORE  wdata = destination address; drains the array into memory via the store unit
// The slave grants a write only while the sequencer is idle, so a core issuing a command to
// a busy co-processor waits; reads (STATUS) are always granted and answered next cycle.
// LOAD: the array advances (en) only in a cycle where both input FIFOs hold a vector; any
// other cycle before the K-th vector is a stall. After the K-th vector, 2N more enabled
// cycles let the last operands reach every accumulator. STORE: one shift per cycle while the
// output FIFO has room (N shifts, bottom row first), then wait for the store unit. evt
// pulses when a LOAD or STORE has finished.
// The instruction set is the paper's; the register encoding, the blocking write and the
// clearing by SETUP are this design's own.
module hwpe_ctrl
  import ps_pkg::*;
#(
  parameter int unsigned N = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  // peripheral slave
  input  logic        cfg_req,
  input  logic        cfg_we,
  input  logic [2:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic        cfg_gnt,
  output logic        cfg_rvalid,
  output logic [31:0] cfg_rdata,
  // load units
  output logic        ld_start,
  output logic [31:0] ld_xaddr,
  output logic [31:0] ld_waddr,
  output logic [15:0] ld_len,
  input  logic        a_empty,
  input  logic        b_empty,
  output logic        pop_ab,
  // systolic array
  output prec_e       prec,
  output logic        sa_en,
  output logic        sa_clr,
  output logic        sa_shift,
  output logic        sa_vld,
  // output FIFO and store unit
  input  logic        y_full,
  output logic        y_push,
  output logic        st_start,
  output logic [31:0] st_base,
  input  logic        st_done,
  // status
  output logic        busy,
  output logic        evt
);
  typedef enum logic [2:0] {S_IDLE, S_CLR, S_LOAD, S_FLUSH, S_DRAIN, S_STWAIT} state_e;
  state_e      state;
  logic [15:0] fed;
  logic [$clog2(2*N+1)-1:0] cnt;
  logic        wr;

  assign busy      = (state != S_IDLE);
  assign cfg_gnt   = cfg_req && (!cfg_we || !busy);
  assign wr        = cfg_req && cfg_we && !busy;
  assign sa_clr    = (state == S_CLR);
  assign pop_ab    = (state == S_LOAD) && (fed != ld_len) && !a_empty && !b_empty;
  assign sa_vld    = pop_ab;
  assign sa_en     = pop_ab || (state == S_FLUSH);
  assign sa_shift  = (state == S_DRAIN) && !y_full;
  assign y_push    = sa_shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; prec <= PREC_INT8; ld_xaddr <= '0; ld_waddr <= '0; ld_len <= '0;
      st_base <= '0; fed <= '0; cnt <= '0; ld_start <= 1'b0; st_start <= 1'b0; evt <= 1'b0;
      cfg_rvalid <= 1'b0; cfg_rdata <= '0;
    end else begin
      ld_start   <= 1'b0;
      st_start   <= 1'b0;
      evt        <= 1'b0;
      cfg_rvalid <= cfg_req && !cfg_we;
      cfg_rdata  <= {25'd0, 3'(prec), 3'd0, busy};
      unique case (state)
        S_IDLE: if (wr) begin
          unique case (cfg_addr)
            REG_SETUP: begin prec <= prec_e'(cfg_wdata[2:0]); state <= S_CLR; end
            REG_XADDR: ld_xaddr <= cfg_wdata;
            REG_WADDR: ld_waddr <= cfg_wdata;
            REG_LEN:   ld_len   <= cfg_wdata[15:0];
            REG_LOAD:  begin ld_start <= 1'b1; fed <= '0; state <= S_LOAD; end
            REG_STORE: begin st_base <= cfg_wdata; st_start <= 1'b1; cnt <= '0; state <= S_DRAIN; end
            default: ;
          endcase
        end
        S_CLR: state <= S_IDLE;
        S_LOAD: begin
          if (pop_ab) fed <= fed + 16'd1;
          if (fed == ld_len || (pop_ab && fed + 16'd1 == ld_len)) begin
            state <= S_FLUSH;
            cnt   <= '0;
          end
        end
        S_FLUSH: begin
          cnt <= cnt + 1'b1;
          if (cnt == ($clog2(2*N+1))'(2 * N - 1)) begin
            state <= S_IDLE;
            evt   <= 1'b1;
          end
        end
        S_DRAIN: if (sa_shift) begin
          cnt <= cnt + 1'b1;
          if (cnt == ($clog2(2*N+1))'(N - 1)) state <= S_STWAIT;
        end
        S_STWAIT: if (st_done) begin
          state <= S_IDLE;
          evt   <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) pop_ab |-> !a_empty && !b_empty);
endmodule

// streamer_interco: connects the co-processor's three streamers to its two memory ports.
//
// Requesters: 0 = X load unit (matrix A), 1 = W load unit (matrix B), 2 = store unit.
// Port 1 belongs to the W load unit alone. Port 0 is shared by the X load unit and the store
// unit through a round-robin arbiter (the one granted last has the lower priority next time);
// in practice they are never active together, as a STORE only starts after a LOAD has ended.
// With one read stream per port, both operand streams can deliver one vector per cycle and
// the array can advance every cycle. Read data return with m_rvalid in order on each port
// and are handed to that port's load unit.
// The paper shows this block only by name; the port split and the policy are this design's own.
module streamer_interco #(
  parameter int unsigned DW = 384
) (
  input  logic          clk,
  input  logic          rst_n,
  // requesters
  input  logic [2:0]    s_req,
  input  logic [31:0]   s_addr  [3],
  input  logic [2:0]    s_we,
  input  logic [DW-1:0] s_wdata [3],
  output logic [2:0]    s_gnt,
  output logic [1:0]    s_rvalid,   // read data valid, for the two load units
  output logic [DW-1:0] s_rdata [2],
  // master ports
  output logic [1:0]    m_req,
  output logic [31:0]   m_addr  [2],
  output logic [1:0]    m_we,
  output logic [DW-1:0] m_wdata [2],
  input  logic [1:0]    m_gnt,
  input  logic [1:0]    m_rvalid,
  input  logic [DW-1:0] m_rdata [2]
);
  logic last_store;   // port 0: 1 if the store unit was granted last
  logic sel_store;

  always_comb begin
    // port 0: X load unit and store unit
    if (s_req[0] && s_req[2]) sel_store = !last_store;
    else                      sel_store = s_req[2];
    m_req[0]   = s_req[0] || s_req[2];
    m_addr[0]  = sel_store ? s_addr[2]  : s_addr[0];
    m_we[0]    = sel_store ? s_we[2]    : s_we[0];
    m_wdata[0] = sel_store ? s_wdata[2] : s_wdata[0];
    // port 1: W load unit
    m_req[1]   = s_req[1];
    m_addr[1]  = s_addr[1];
    m_we[1]    = s_we[1];
    m_wdata[1] = s_wdata[1];
    s_gnt[0]   = m_gnt[0] && s_req[0] && !sel_store;
    s_gnt[2]   = m_gnt[0] && s_req[2] && sel_store;
    s_gnt[1]   = m_gnt[1] && s_req[1];
    s_rvalid   = m_rvalid;
    s_rdata    = m_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  last_store <= 1'b0;
    else if (m_req[0] && m_gnt[0]) last_store <= sel_store;
  end

  a_store_is_write: assert property (@(posedge clk) disable iff (!rst_n) s_req[2] |-> s_we[2]);
  a_loads_read:     assert property (@(posedge clk) disable iff (!rst_n) !s_we[0] && !s_we[1]);
endmodule

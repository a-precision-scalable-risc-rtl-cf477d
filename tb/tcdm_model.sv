// tcdm_model: behavioural model of the cluster's shared data memory as seen by the
// co-processor's two wide ports (testbench only; the real memory is a set of SRAM banks
// behind the cluster interconnect). Each port accesses DW/32 consecutive 32-bit words at a
// byte address with a req/gnt handshake; read data arrive with rvalid one cycle after the
// grant. With stall_en each port's grant is withheld in random cycles to model bank
// conflicts with the cores.
module tcdm_model #(
  parameter int unsigned DW    = 384,
  parameter int unsigned WORDS = 16384
) (
  input  logic          clk,
  input  logic          stall_en,
  input  logic [1:0]    req,
  input  logic [31:0]   addr  [2],
  input  logic [1:0]    we,
  input  logic [DW-1:0] wdata [2],
  output logic [1:0]    gnt,
  output logic [1:0]    rvalid,
  output logic [DW-1:0] rdata [2]
);
  localparam int unsigned NW = DW / 32;
  logic [31:0] mem [WORDS];
  int          stall_cycles = 0;

  initial begin
    gnt    = 2'b11;
    rvalid = 2'b00;
    rdata  = '{default: '0};
  end
  always @(negedge clk)
    for (int p = 0; p < 2; p++) gnt[p] <= !stall_en || ($urandom % 4 != 0);

  always @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      rvalid[p] <= req[p] && gnt[p] && !we[p];
      if (req[p] && !gnt[p]) stall_cycles++;
      if (req[p] && gnt[p]) begin
        for (int w = 0; w < int'(NW); w++) begin
          int unsigned idx;
          idx = (addr[p] >> 2) + w;
          if (we[p]) mem[idx % WORDS] <= wdata[p][32*w +: 32];
          else       rdata[p][32*w +: 32] <= mem[idx % WORDS];
        end
      end
    end
  end
endmodule

// sync_fifo: synchronous first-in first-out buffer.
//
// Used three times in the co-processor: between each load unit and the systolic array and
// between the array and the store unit. A word written with push is visible on dout (first
// word first) from the next cycle and removed by pop. Pushing when full or popping when
// empty is a usage error flagged by assertions; the FIFO ignores it. free is the number of
// empty slots, which the load units use as credit. Depth and width are this design's choice;
// the paper only shows the FIFOs. Asynchronous active-low reset empties the FIFO.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               din,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] free
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  typedef logic [$clog2(DEPTH+1)-1:0] cnt_t;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  cnt_t          cnt;
  logic          do_push, do_pop;

  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign full    = (cnt == cnt_t'(DEPTH));
  assign empty   = (cnt == '0);
  assign free    = cnt_t'(DEPTH) - cnt;
  assign dout    = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + cnt_t'(do_push) - cnt_t'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule

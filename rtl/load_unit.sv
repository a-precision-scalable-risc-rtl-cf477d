// load_unit: operand streamer for one input of the systolic array.
//
// On start it reads len consecutive DW-bit vectors from base, base + DW/8, ... (A column by
// column for the X side, B row by row for the W side) and pushes each returned vector into
// its FIFO. A read is requested only when the FIFO has room for it and for every read still
// in flight (credit taken from the FIFO's free count), so the FIFO never overflows and a
// full FIFO stalls the loads. Requests follow a req/gnt handshake (address held until gnt);
// data comes back with rvalid some cycles later, in order. done pulses when the last vector
// has been pushed. The address pattern and credit scheme are this design's own.
module load_unit #(
  parameter int unsigned DW    = 384,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [31:0]                base,
  input  logic [15:0]                len,
  output logic                       busy,
  output logic                       done,
  // request side
  output logic                       req,
  output logic [31:0]                addr,
  input  logic                       gnt,
  input  logic                       rvalid,
  input  logic [DW-1:0]              rdata,
  // FIFO side
  input  logic [$clog2(DEPTH+1)-1:0] fifo_free,
  output logic                       push,
  output logic [DW-1:0]              push_data
);
  logic [15:0] issued, received;
  logic [$clog2(DEPTH+1):0] inflight;
  logic [31:0] next_addr;

  assign req       = busy && (issued != len) && (32'(inflight) < 32'(fifo_free));
  assign addr      = next_addr;
  assign push      = busy && rvalid;
  assign push_data = rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; issued <= '0; received <= '0; inflight <= '0; next_addr <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= (len != 16'd0);
        done      <= (len == 16'd0);
        issued    <= '0;
        received  <= '0;
        inflight  <= '0;
        next_addr <= base;
      end else if (busy) begin
        if (req && gnt) begin
          issued    <= issued + 16'd1;
          next_addr <= next_addr + 32'(DW / 8);
        end
        inflight <= inflight + (($clog2(DEPTH+1)+1)'(req && gnt)) - (($clog2(DEPTH+1)+1)'(rvalid));
        if (rvalid) begin
          received <= received + 16'd1;
          if (received + 16'd1 == len) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 req && !gnt |=> req && $stable(addr));
endmodule

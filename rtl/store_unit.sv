// store_unit: writes the result rows drained from the systolic array to memory.
//
// The array drains one row of N 64-bit results per shift cycle, bottom row first, into the
// output FIFO. On start the store unit pops N rows; row r of the drain order is row
// N-1-r of Y. Each row is stored as 2N consecutive 32-bit words (Y[i][j] low word at 2j,
// high word at 2j+1) at base + i*2N*4, written in two DW = N*32-bit beats with a req/we/gnt
// handshake. done pulses after the last beat is granted. Layout and beat order are this
// design's own; the paper only says one instruction stores all results.
module store_unit #(
  parameter int unsigned N = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [31:0]       base,
  output logic              busy,
  output logic              done,
  // output FIFO
  input  logic              fifo_empty,
  input  logic [N*64-1:0]   fifo_dout,
  output logic              fifo_pop,
  // write request
  output logic              req,
  output logic [31:0]       addr,
  output logic [N*32-1:0]   wdata,
  input  logic              gnt
);
  logic [$clog2(N+1)-1:0] rows;     // rows already stored
  logic                   beat;
  logic [$clog2(N)-1:0]   row_idx;

  assign row_idx  = $clog2(N)'(N - 1) - $clog2(N)'(rows);
  assign req      = busy && !fifo_empty;
  assign addr     = base + 32'(row_idx) * 32'(8 * N) + (beat ? 32'(4 * N) : 32'd0);
  assign wdata    = beat ? fifo_dout[N*64-1 -: N*32] : fifo_dout[N*32-1:0];
  assign fifo_pop = req && gnt && beat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rows <= '0; beat <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        rows <= '0;
        beat <= 1'b0;
      end else if (req && gnt) begin
        beat <= ~beat;
        if (beat) begin
          rows <= rows + 1'b1;
          if (rows == $clog2(N+1)'(N - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end
endmodule

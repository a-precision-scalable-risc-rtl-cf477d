// systolic_array: N x N output-stationary array of precision-scalable PEs.
//
// Each step k the array takes one column of A (a_col, one 32-bit word per row) and one row of
// B (b_row, one word per column). Skew registers delay row i and column j by i and j cycles,
// so PE(i,j) sees A[i][k] and B[k][j] in the same cycle and accumulates
// Y[i][j] += A[i][k] * B[k][j] lane by lane in the selected precision. X moves right and W
// moves down through the PEs; Y stays in place. With en held high, a vector pair given in
// cycle t has reached every PE's accumulator after 2N further cycles, so K steps finish after
// K + 2N enabled cycles. en = 0 stalls the whole array and its skew registers.
// In shift mode every column moves Y down one PE per cycle: y_bot shows row N-1 first, then
// N-2, ..., 0 in the following shift cycles. The top row shifts in zeros.
// Operand feeding from the left and the top and results leaving at the bottom follow the
// paper's block diagram; the skew registers and the timing are this design's own.
module systolic_array
  import ps_pkg::*;
#(
  parameter int unsigned N = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  prec_e            prec,
  input  logic             en,
  input  logic             clr,
  input  logic             shift,
  input  logic [N*32-1:0]  a_col,
  input  logic             a_vld,
  input  logic [N*32-1:0]  b_row,
  input  logic             b_vld,
  output logic [N*64-1:0]  y_bot
);
  // operand wires between PEs: x[i][j] is the input of PE(i,j) from the left
  logic [31:0] xw [N][N+1];
  logic        xv [N][N+1];
  logic [31:0] ww [N+1][N];
  logic        wv [N+1][N];
  logic [63:0] yw [N+1][N];

  // skew registers: row i and column i delayed by i cycles
  for (genvar i = 0; i < N; i++) begin : g_skew
    logic [31:0] xs [i+1];
    logic        xsv[i+1];
    logic [31:0] ws [i+1];
    logic        wsv[i+1];
    assign xs[0]  = a_col[32*i +: 32];
    assign xsv[0] = a_vld;
    assign ws[0]  = b_row[32*i +: 32];
    assign wsv[0] = b_vld;
    for (genvar s = 0; s < i; s++) begin : g_stage
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          xs[s+1] <= '0; xsv[s+1] <= 1'b0; ws[s+1] <= '0; wsv[s+1] <= 1'b0;
        end else if (clr) begin
          xsv[s+1] <= 1'b0; wsv[s+1] <= 1'b0;
        end else if (en && !shift) begin
          xs[s+1] <= xs[s]; xsv[s+1] <= xsv[s]; ws[s+1] <= ws[s]; wsv[s+1] <= wsv[s];
        end
      end
    end
    assign xw[i][0] = xs[i];
    assign xv[i][0] = xsv[i];
    assign ww[0][i] = ws[i];
    assign wv[0][i] = wsv[i];
    assign yw[0][i] = '0;
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      ps_pe u_pe (
        .clk   (clk),       .rst_n (rst_n),     .prec  (prec),
        .en    (en),        .clr   (clr),       .shift (shift),
        .x_in  (xw[i][j]),  .xv_in (xv[i][j]),
        .w_in  (ww[i][j]),  .wv_in (wv[i][j]),
        .y_in  (yw[i][j]),
        .x_out (xw[i][j+1]), .xv_out (xv[i][j+1]),
        .w_out (ww[i+1][j]), .wv_out (wv[i+1][j]),
        .y_out (yw[i+1][j])
      );
    end
  end

  for (genvar j = 0; j < N; j++) begin : g_out
    assign y_bot[64*j +: 64] = yw[N][j];
  end
endmodule

// systolic_array -- N x N output-stationary systolic array of 32-bit
// multiply-accumulate cells.
//
// Row i of A enters at the left edge of row i, column j of B at the top of
// column j. Each cell multiplies the A value coming from its left and the B
// value coming from above, adds the product to its own accumulator, and passes
// A to the right and B downwards one clock later. With the inputs skewed (row
// i of A and column j of B delayed by i and j clocks; the caller does this),
// cell (i,j) sees A[i][k] and B[k][j] together on clock k+i+j, so after
// K + 2N - 2 enabled clocks every accumulator holds C[i][j] = sum_k A[i][k]
// B[k][j]. clear zeroes all accumulators and pipeline registers. Arithmetic
// wraps at 32 bits like C int arithmetic.
//
// The paper says only that its matrix-multiplication kernel is a systolic
// array (after a Vitis example); this cell arrangement and the default N = 16
// (that example's maximum matrix size) are this design's.
module systolic_array #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         clear,
  input  logic         en,
  input  logic [W-1:0] a_in [N],      // left edge, one value per row
  input  logic [W-1:0] b_in [N],      // top edge, one value per column
  output logic [W-1:0] acc  [N][N]
);
  logic [W-1:0] a_reg [N][N];   // A value leaving cell (i,j) to the right
  logic [W-1:0] b_reg [N][N];   // B value leaving cell (i,j) downwards

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        if (clear) begin
          a_reg[i][j] <= '0;
          b_reg[i][j] <= '0;
          acc[i][j]   <= '0;
        end else if (en) begin
          automatic logic [W-1:0] av = (j == 0) ? a_in[i] : a_reg[i][j-1];
          automatic logic [W-1:0] bv = (i == 0) ? b_in[j] : b_reg[i-1][j];
          a_reg[i][j] <= av;
          b_reg[i][j] <= bv;
          acc[i][j]   <= acc[i][j] + av * bv;
        end
      end
    end
  end
endmodule

// outer_product: one row of the weight gradient, dW[r][j] = X[r] * dY_A[j].
//
// The weight update runs row by row; for row r the layer presents X[r], the
// input that row saw in the forward pass, and the stored error gradients
// dY_A of all columns. With en high the signed products are registered and
// appear on grad the next cycle.
//
// From the paper: the outer product of X and dY_A gives dW. This design's own
// choice: one row per cycle with full-precision 2*X_W-bit products.
module outer_product
  import hic_pkg::*;
#(
  parameter int unsigned COLS = 64
) (
  input  logic                    clk,
  input  logic                    en,
  input  code_t                   x,
  input  code_t                   dy   [COLS],
  output logic signed [2*X_W-1:0] grad [COLS]
);

  always_ff @(posedge clk) begin
    if (en)
      for (int j = 0; j < COLS; j++) grad[j] <= x * dy[j];
  end

endmodule

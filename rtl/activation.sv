// activation: ReLU on the normalized outputs and its derivative.
//
// Forward (fwd_en): z = max(y_n, 0), and each column remembers whether its
// input was positive. Backward (bwd_en): dy_n = dz where the last forward
// input was positive, 0 elsewhere. Both results are registered and appear the
// next cycle.
//
// From the paper: an activation such as ReLU, sigmoid or tanh follows the
// normalization. This design's own choice: ReLU only, the activation of the
// residual networks the architecture is evaluated on.
module activation
  import hic_pkg::*;
#(
  parameter int unsigned COLS = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  fwd_en,
  input  code_t y_n  [COLS],
  output code_t z    [COLS],
  input  logic  bwd_en,
  input  code_t dz   [COLS],
  output code_t dy_n [COLS]
);

  logic [COLS-1:0] pos;   // forward input was > 0

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos <= '0;
      for (int j = 0; j < COLS; j++) begin
        z[j]    <= '0;
        dy_n[j] <= '0;
      end
    end else begin
      if (fwd_en)
        for (int j = 0; j < COLS; j++) begin
          pos[j] <= y_n[j] > 0;
          z[j]   <= (y_n[j] > 0) ? y_n[j] : '0;
        end
      if (bwd_en)
        for (int j = 0; j < COLS; j++)
          dy_n[j] <= pos[j] ? dz[j] : '0;
    end
  end

endmodule

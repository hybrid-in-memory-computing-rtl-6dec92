// normalize: per-column batch normalization of the forward ADC codes, its
// backward pass, and the statistics from which the batch mean and variance
// are computed.
//
//   forward:  y_n  = sat( ((y_a - mu) * g) >>> GF + beta )
//   backward: dy_a = sat( (dy_n * g) >>> GF )
// mu and beta are X_W-bit codes, g = gamma / sigma is signed with GF fraction
// bits (reset: mu = 0, g = 1.0, beta = 0). The host writes one column's
// mu, g and beta through cfg_*. Every forward step also adds y_a and y_a^2 of
// each column into stat_sum / stat_sq and counts the steps in stat_n;
// stat_clr clears them. The host turns these into the mean and variance of a
// batch (or of a calibration set) and writes mu and g back; division and
// square root are not done here. fwd_en / bwd_en register their result for
// the next cycle. Shifts floor toward minus infinity; results saturate to the
// X_W-bit range.
//
// From the paper: a normalization such as batch or group normalization is
// computed on the ADC output, and drift compensation recomputes the global
// mean and variance of the normalization layers. This design's own choices:
// the fixed-point formats, host-side mean/variance arithmetic, and a backward
// pass that treats mu and g as constants.
module normalize
  import hic_pkg::*;
#(
  parameter int unsigned COLS   = 64,
  parameter int unsigned GF     = 4,
  parameter int unsigned STAT_W = 32,
  localparam int unsigned CA    = $clog2(COLS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     fwd_en,
  input  code_t                    y_a      [COLS],
  output code_t                    y_n      [COLS],
  input  logic                     bwd_en,
  input  code_t                    dy_n     [COLS],
  output code_t                    dy_a     [COLS],
  input  logic                     cfg_we,
  input  logic [CA-1:0]            cfg_col,
  input  code_t                    cfg_mu,
  input  code_t                    cfg_g,
  input  code_t                    cfg_beta,
  input  logic                     stat_clr,
  output logic signed [STAT_W-1:0] stat_sum [COLS],
  output logic [STAT_W-1:0]        stat_sq  [COLS],
  output logic [STAT_W-1:0]        stat_n
);

  localparam int unsigned PW = 2 * X_W + 2;
  localparam logic signed [PW-1:0] CMAX = PW'((1 << (X_W - 1)) - 1);
  localparam logic signed [PW-1:0] CMIN = -PW'(1 << (X_W - 1));

  code_t mu [COLS], g [COLS], beta [COLS];

  function automatic code_t sat(logic signed [PW-1:0] v);
    if (v > CMAX) return code_t'(CMAX);
    if (v < CMIN) return code_t'(CMIN);
    return code_t'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < COLS; j++) begin
        mu[j]   <= '0;
        g[j]    <= code_t'(1 << GF);
        beta[j] <= '0;
      end
    end else if (cfg_we) begin
      mu[cfg_col]   <= cfg_mu;
      g[cfg_col]    <= cfg_g;
      beta[cfg_col] <= cfg_beta;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < COLS; j++) begin
        y_n[j]      <= '0;
        dy_a[j]     <= '0;
        stat_sum[j] <= '0;
        stat_sq[j]  <= '0;
      end
      stat_n <= '0;
    end else begin
      if (fwd_en) begin
        for (int j = 0; j < COLS; j++) begin
          logic signed [PW-1:0] t;
          t = ((PW'(y_a[j]) - PW'(mu[j])) * PW'(g[j])) >>> GF;
          y_n[j] <= sat(t + PW'(beta[j]));
        end
      end
      if (bwd_en) begin
        for (int j = 0; j < COLS; j++)
          dy_a[j] <= sat((PW'(dy_n[j]) * PW'(g[j])) >>> GF);
      end
      if (stat_clr) begin
        for (int j = 0; j < COLS; j++) begin
          stat_sum[j] <= '0;
          stat_sq[j]  <= '0;
        end
        stat_n <= '0;
      end else if (fwd_en) begin
        for (int j = 0; j < COLS; j++) begin
          stat_sum[j] <= stat_sum[j] + STAT_W'(y_a[j]);
          stat_sq[j]  <= stat_sq[j] + STAT_W'(unsigned'(32'(y_a[j] * y_a[j])));
        end
        stat_n <= stat_n + 1'b1;
      end
    end
  end

endmodule

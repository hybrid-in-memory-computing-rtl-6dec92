// optimizer: stochastic-gradient-descent step and quantizer between the
// outer product and the LSB array.
//
// For every column of a gradient row it computes dw = -lr * grad, rounds it
// half away from zero to whole LSB units and saturates it to the signed
// LSB_W-bit range, which the read-modify-write adds to the LSB word. The
// learning rate lr is unsigned Q0.LR_W (LSB units per gradient unit); reset
// loads LR_INIT, lr_load loads lr_in, and lr_decay multiplies lr by
// DECAY / 2^LR_W (truncating). With en high the quantized row is registered
// and appears on dw the next cycle.
//
// From the paper: the learning rate 0.05 and the decay factor 0.45 (the
// defaults of LR_INIT and DECAY), and that the weight gradients are quantized
// before they update the LSB array. This design's own choices: plain SGD
// with no momentum, the fixed-point formats and the rounding mode.
module optimizer
  import hic_pkg::*;
#(
  parameter int unsigned COLS    = 64,
  parameter int unsigned G_W     = 2 * X_W,
  parameter int unsigned LR_W    = 16,
  parameter logic [15:0] LR_INIT = 16'd3277,   // 0.05 in Q0.16
  parameter logic [15:0] DECAY   = 16'd29491   // 0.45 in Q0.16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic signed [G_W-1:0] grad [COLS],
  output lsb_t                  dw   [COLS],
  input  logic                  lr_load,
  input  logic [LR_W-1:0]       lr_in,
  input  logic                  lr_decay,
  output logic [LR_W-1:0]       lr
);

  localparam int unsigned PW = G_W + LR_W + 1;
  localparam logic [PW-1:0] HALF = PW'(1) << (LR_W - 1);
  localparam logic [PW-1:0] QMAX = PW'((1 << (LSB_W - 1)) - 1);   // +63
  localparam logic [PW-1:0] QMIN = PW'(1 << (LSB_W - 1));         // |-64|

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        lr <= LR_W'(LR_INIT);
    else if (lr_load)  lr <= lr_in;
    else if (lr_decay) lr <= LR_W'((2 * LR_W)'(lr) * (2 * LR_W)'(DECAY) >> LR_W);
  end

  always_ff @(posedge clk) begin
    if (en) begin
      for (int j = 0; j < COLS; j++) begin
        logic          neg;   // sign of -lr * grad
        logic [PW-1:0] mag;   // |lr * grad|
        logic [PW-1:0] q;     // |dw| before saturation
        neg = !grad[j][G_W-1] && (grad[j] != '0);
        mag = PW'(grad[j][G_W-1] ? -(PW'(grad[j])) : PW'(grad[j])) * PW'(lr);
        q   = (mag + HALF) >> LR_W;
        if (neg) dw[j] <= (q > QMIN) ? lsb_t'(-int'(QMIN)) : lsb_t'(-int'(q));
        else     dw[j] <= (q > QMAX) ? lsb_t'(QMAX)        : lsb_t'(q);
      end
    end
  end

endmodule

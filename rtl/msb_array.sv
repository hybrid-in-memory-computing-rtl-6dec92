// msb_array: BEHAVIOURAL MODEL of the transposable multi-level PCM crossbar
// (T-PCM array) that holds the MSB part of every weight. The real part is an
// analog array; this model is integer arithmetic, not a circuit.
//
// Each cell is a differential pair of PCM devices, G+ and G-, each a
// conductance level 0..2^DEV_W-1; the cell's weight is G+ - G-. A DAC code on
// an input line times a level is one unit of line current.
//   forward:   col_sum[j] = sum_i row_in[i] * (G+[i][j] - G-[i][j])
//   transpose: row_sum[i] = sum_j col_in[j] * (G+[i][j] - G-[i][j])
// Both are registered: the sums appear the cycle after fwd_en / bwd_en and
// hold until the next product.
//
// Programming follows the paper's rule that the MSB devices can only be made
// more conductive: prog_en gives one SET pulse, in the masked columns of
// prog_row, to G+ (prog_neg=0) or G- (prog_neg=1). A device at its top level
// stays there and its bit of prog_sat is raised the next cycle. ref_en refreshes a row,
// which the paper does every 10 batches to keep the pairs out of
// saturation: both devices of each cell are RESET and the difference is SET
// back onto one of them, so the weight is kept and one device is at zero.
// Reset RESETs every device.
//
// From the paper: the transposable array, differential pairs, SET-only
// programming, refresh. This design's own choices: 3-bit device levels, one
// level per pulse (linear, noise-free, no drift), one row per cycle for
// programming and refresh, and the refresh procedure itself.
module msb_array
  import hic_pkg::*;
#(
  parameter int unsigned ROWS = 576,
  parameter int unsigned COLS = 64,
  localparam int unsigned CW  = acc_width(ROWS),   // column current width
  localparam int unsigned RW  = acc_width(COLS),   // row current width
  localparam int unsigned RA  = $clog2(ROWS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // forward VMM
  input  logic                 fwd_en,
  input  code_t                row_in  [ROWS],
  output logic signed [CW-1:0] col_sum [COLS],
  // transposed VMM
  input  logic                 bwd_en,
  input  code_t                col_in  [COLS],
  output logic signed [RW-1:0] row_sum [ROWS],
  // SET programming of one row
  input  logic                 prog_en,
  input  logic [RA-1:0]        prog_row,
  input  logic [COLS-1:0]      prog_mask,
  input  logic [COLS-1:0]      prog_neg,
  output logic [COLS-1:0]      prog_sat,
  // refresh of one row
  input  logic                 ref_en,
  input  logic [RA-1:0]        ref_row
);

  localparam level_t TOP = '1;

  level_t gp [ROWS][COLS];
  level_t gn [ROWS][COLS];

  function automatic logic signed [DEV_W:0] weight(level_t p, level_t n);
    return $signed({1'b0, p}) - $signed({1'b0, n});
  endfunction

  // Device state: reset, programming, refresh.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) begin
          gp[i][j] <= '0;
          gn[i][j] <= '0;
        end
      prog_sat <= '0;
    end else begin
      prog_sat <= '0;
      if (prog_en) begin
        for (int j = 0; j < COLS; j++) begin
          if (prog_mask[j]) begin
            if (!prog_neg[j]) begin
              if (gp[prog_row][j] == TOP) prog_sat[j] <= 1'b1;
              else gp[prog_row][j] <= gp[prog_row][j] + 1'b1;
            end else begin
              if (gn[prog_row][j] == TOP) prog_sat[j] <= 1'b1;
              else gn[prog_row][j] <= gn[prog_row][j] + 1'b1;
            end
          end
        end
      end else if (ref_en) begin
        for (int j = 0; j < COLS; j++) begin
          if (gp[ref_row][j] >= gn[ref_row][j]) begin
            gp[ref_row][j] <= gp[ref_row][j] - gn[ref_row][j];
            gn[ref_row][j] <= '0;
          end else begin
            gn[ref_row][j] <= gn[ref_row][j] - gp[ref_row][j];
            gp[ref_row][j] <= '0;
          end
        end
      end
    end
  end

  // Forward product: inputs on the rows, currents summed on the columns.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < COLS; j++) col_sum[j] <= '0;
    end else if (fwd_en) begin
      for (int j = 0; j < COLS; j++) begin
        logic signed [CW-1:0] acc;
        acc = '0;
        for (int i = 0; i < ROWS; i++)
          acc += CW'(row_in[i]) * CW'(weight(gp[i][j], gn[i][j]));
        col_sum[j] <= acc;
      end
    end
  end

  // Transposed product: inputs on the columns, currents summed on the rows.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++) row_sum[i] <= '0;
    end else if (bwd_en) begin
      for (int i = 0; i < ROWS; i++) begin
        logic signed [RW-1:0] acc;
        acc = '0;
        for (int j = 0; j < COLS; j++)
          acc += RW'(col_in[j]) * RW'(weight(gp[i][j], gn[i][j]));
        row_sum[i] <= acc;
      end
    end
  end

  // Programming and refresh share the device write path.
  a_prog_ref_excl : assert property (@(posedge clk) disable iff (!rst_n) !(prog_en && ref_en))
    else $error("msb_array: programming and refresh in the same cycle");

endmodule

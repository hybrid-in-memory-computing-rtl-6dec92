// hic_layer: one deep-neural-network layer trained on the hybrid in-memory
// computing (HIC) architecture.
//
// Each weight is split in two. Its MSB part is a differential pair of
// multi-level PCM devices in a transposable crossbar (msb_array), which does
// the forward and backward vector-matrix products in place. Its LSB part is a
// 7-bit signed word of binary PCM devices (lsb_array) that accumulates the
// small, quantized weight updates; only when an LSB word overflows is the MSB
// pair programmed, with one SET pulse. Inference needs only the MSB array.
//
// Data flow (hic_ctrl sequences it):
//   forward  X -> crossbar rows -> column ADCs -> normalize -> ReLU -> Z
//   backward dZ -> ReLU' -> normalize' -> dY_A -> crossbar columns
//            -> row ADCs -> dX
//   update   for each row r: dW = X[r] * dY_A (outer_product), dw = quantized
//            -lr * dW (optimizer), LSB row += dw by bit flips (lsb_rmw),
//            overflowing cells get one SET pulse on G+ or G-
//   refresh  after every REFRESH_BATCHES batch_end pulses, every MSB row is
//            refreshed before the next command
// X is latched when an OP_FWD is accepted, dZ when an OP_BWD is accepted, and
// dY_A during the backward pass; the update uses the latched X and dY_A.
// The DACs are the code inputs of the crossbar model. The host can also SET
// single MSB devices (host_prog_*, while idle) to load initial weights, write
// the normalization parameters, the learning rate and its decay, and read
// the batch statistics and event counters.
//
// Timing: OP_FWD 4 cycles (Z valid with z_valid in the 4th), OP_BWD 5 cycles
// (dX valid with dx_valid in the 5th), OP_UPD 3*ROWS, OP_INIT 2*ROWS,
// refresh ROWS cycles.
//
// From the paper: the split of the weight, the datapath of the layer, 8-bit
// converters, the 7-bit LSB word, SET-only MSB programming on overflow, the
// refresh every 10 batches and the learning rate 0.05 with decay 0.45. This
// design's own choices: the array size, the ADC scaling, the command
// interface, the latches for X/dZ/dY_A, the host ports and the counters.
module hic_layer
  import hic_pkg::*;
#(
  parameter int unsigned ROWS            = 576,
  parameter int unsigned COLS            = 64,
  parameter int unsigned FWD_SHIFT       = 4,
  parameter int unsigned BWD_SHIFT       = 4,
  parameter int unsigned REFRESH_BATCHES = hic_pkg::REFRESH_PERIOD,
  localparam int unsigned RA             = $clog2(ROWS),
  localparam int unsigned CA             = $clog2(COLS),
  localparam int unsigned CW             = acc_width(ROWS),
  localparam int unsigned RW             = acc_width(COLS),
  localparam int unsigned FW             = $clog2(COLS * LSB_W + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // commands
  input  logic              cmd_valid,
  input  op_t               cmd_op,
  output logic              cmd_ready,
  output logic              busy,
  output logic              done,
  input  logic              batch_end,
  output logic              refresh_pending,
  // forward data
  input  code_t             x_in  [ROWS],
  output code_t             z_out [COLS],
  output logic              z_valid,
  // backward data
  input  code_t             dz_in  [COLS],
  output code_t             dx_out [ROWS],
  output logic              dx_valid,
  // normalization parameters and statistics
  input  logic              cfg_we,
  input  logic [CA-1:0]     cfg_col,
  input  code_t             cfg_mu,
  input  code_t             cfg_g,
  input  code_t             cfg_beta,
  input  logic              stat_clr,
  output logic signed [31:0] stat_sum [COLS],
  output logic [31:0]       stat_sq  [COLS],
  output logic [31:0]       stat_n,
  // learning rate
  input  logic              lr_load,
  input  logic [15:0]       lr_in,
  input  logic              lr_decay,
  output logic [15:0]       lr,
  // host SET pulses for weight initialisation (honoured only while idle)
  input  logic              host_prog_en,
  input  logic [RA-1:0]     host_prog_row,
  input  logic [COLS-1:0]   host_prog_mask,
  input  logic [COLS-1:0]   host_prog_neg,
  // event counters
  output logic [31:0]       cnt_overflow,   // MSB SET pulses caused by LSB overflow
  output logic [31:0]       cnt_flips,      // LSB devices toggled
  output logic [31:0]       cnt_sat,        // SET pulses that met a saturated device
  output logic [31:0]       cnt_refresh     // MSB rows refreshed
);

  strobes_t        stb;
  logic [RA-1:0]   row;
  logic            accept;

  code_t           x_buf   [ROWS];
  code_t           dz_buf  [COLS];
  code_t           dya_buf [COLS];

  logic signed [CW-1:0] col_sum [COLS];
  logic signed [RW-1:0] row_sum [ROWS];
  code_t           y_a  [COLS];
  code_t           y_n  [COLS];
  code_t           dy_n [COLS];
  code_t           dy_a [COLS];

  logic signed [2*X_W-1:0] grad [COLS];
  lsb_t            dw      [COLS];
  lsb_t            lsb_old [COLS];
  lsb_t            flip    [COLS];
  logic [COLS-1:0] ovf, ovf_neg;
  logic [FW-1:0]   n_flips;

  logic            prog_en, host_prog_ok;
  logic [COLS-1:0] prog_sat;
  logic [RA-1:0]   prog_row;
  logic [COLS-1:0] prog_mask, prog_neg;

  // ---------------- control ----------------
  hic_ctrl #(.ROWS(ROWS), .REFRESH_BATCHES(REFRESH_BATCHES)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_op, .cmd_ready, .batch_end,
    .stb, .row, .busy, .done, .refresh_pending
  );

  assign accept  = cmd_valid && cmd_ready;
  assign z_valid  = stb.z_valid;
  assign dx_valid = stb.dx_valid;

  // Input latches: X for the forward pass and the update, dZ for the
  // backward pass, dY_A for the transposed product and the update.
  always_ff @(posedge clk) begin
    if (accept && cmd_op == OP_FWD) x_buf <= x_in;
    if (accept && cmd_op == OP_BWD) dz_buf <= dz_in;
    if (stb.dya_cap) dya_buf <= dy_a;
  end

  // ---------------- MSB crossbar and converters ----------------
  assign host_prog_ok = host_prog_en && !busy;
  assign prog_en   = (stb.wb_en && !stb.wb_clear && (ovf != '0)) || host_prog_ok;
  assign prog_row  = stb.wb_en ? row : host_prog_row;
  assign prog_mask = stb.wb_en ? ovf : host_prog_mask;
  assign prog_neg  = stb.wb_en ? ovf_neg : host_prog_neg;

  msb_array #(.ROWS(ROWS), .COLS(COLS)) u_msb (
    .clk, .rst_n,
    .fwd_en(stb.msb_fwd), .row_in(x_buf),   .col_sum,
    .bwd_en(stb.msb_bwd), .col_in(dya_buf), .row_sum,
    .prog_en, .prog_row, .prog_mask, .prog_neg, .prog_sat,
    .ref_en(stb.msb_ref), .ref_row(row)
  );

  for (genvar j = 0; j < COLS; j++) begin : g_col_adc
    adc #(.ACC_W(CW), .OUT_W(X_W), .SHIFT(FWD_SHIFT)) u_adc (.i_in(col_sum[j]), .code(y_a[j]));
  end
  for (genvar i = 0; i < ROWS; i++) begin : g_row_adc
    adc #(.ACC_W(RW), .OUT_W(X_W), .SHIFT(BWD_SHIFT)) u_adc (.i_in(row_sum[i]), .code(dx_out[i]));
  end

  // ---------------- digital periphery ----------------
  normalize #(.COLS(COLS)) u_norm (
    .clk, .rst_n,
    .fwd_en(stb.norm_fwd), .y_a, .y_n,
    .bwd_en(stb.norm_bwd), .dy_n, .dy_a,
    .cfg_we, .cfg_col, .cfg_mu, .cfg_g, .cfg_beta,
    .stat_clr, .stat_sum, .stat_sq, .stat_n
  );

  activation #(.COLS(COLS)) u_act (
    .clk, .rst_n,
    .fwd_en(stb.act_fwd), .y_n, .z(z_out),
    .bwd_en(stb.act_bwd), .dz(dz_buf), .dy_n
  );

  // ---------------- weight update ----------------
  outer_product #(.COLS(COLS)) u_outer (
    .clk, .en(stb.lsb_rd && !stb.wb_clear), .x(x_buf[row]), .dy(dya_buf), .grad
  );

  optimizer #(.COLS(COLS)) u_opt (
    .clk, .rst_n, .en(stb.opt_en), .grad, .dw,
    .lr_load, .lr_in, .lr_decay, .lr
  );

  lsb_array #(.ROWS(ROWS), .COLS(COLS)) u_lsb (
    .clk,
    .rd_en(stb.lsb_rd), .rd_row(row), .rd_data(lsb_old),
    .wr_en(stb.wb_en),  .wr_row(row), .wr_flip(flip)
  );

  lsb_rmw #(.COLS(COLS)) u_rmw (
    .old_lsb(lsb_old), .dw, .clear(stb.wb_clear), .flip, .ovf, .ovf_neg, .n_flips
  );

  // ---------------- event counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_overflow <= '0;
      cnt_flips    <= '0;
      cnt_sat      <= '0;
      cnt_refresh  <= '0;
    end else begin
      if (stb.wb_en && !stb.wb_clear) cnt_overflow <= cnt_overflow + 32'($countones(ovf));
      if (stb.wb_en)                  cnt_flips    <= cnt_flips + 32'(n_flips);
      cnt_sat <= cnt_sat + 32'($countones(prog_sat));
      if (stb.msb_ref)                cnt_refresh  <= cnt_refresh + 1'b1;
    end
  end

endmodule

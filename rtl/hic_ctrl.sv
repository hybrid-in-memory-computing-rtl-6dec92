// hic_ctrl: sequencer of one HIC training layer.
//
// It accepts one command at a time over a valid/ready handshake (cmd_ready is
// high only when idle and no refresh is pending) and drives the datapath
// through a bundle of one-cycle strobes (hic_pkg::strobes_t) plus the row
// being worked on. done pulses in the last cycle of every command.
//   OP_FWD  4 cycles: crossbar VMM, normalize, activate, Z valid.
//   OP_BWD  5 cycles: activation derivative, normalize backward, capture
//           dY_A, transposed VMM, dX valid.
//   OP_UPD  3 cycles per row, rows 0..ROWS-1: read the LSB row and form the
//           outer product; optimizer; write the flipped bits back and program
//           the MSB cells that overflowed.
//   OP_INIT 2 cycles per row: read the LSB row; write it back cleared.
// The host marks the end of each training batch with batch_end. At every
// REFRESH_BATCHES-th batch_end a refresh becomes pending; it runs before the
// next command is accepted and refreshes one MSB row per cycle.
//
// From the paper: the forward, backward and row-by-row update phases and the
// refresh every 10 batches. This design's own choices: the command set, the
// handshake, and the cycle counts, which are not pipelined across rows.
module hic_ctrl
  import hic_pkg::*;
#(
  parameter int unsigned ROWS            = 576,
  parameter int unsigned REFRESH_BATCHES = hic_pkg::REFRESH_PERIOD,
  localparam int unsigned RA             = $clog2(ROWS),
  localparam int unsigned BW             = $clog2(REFRESH_BATCHES + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  input  op_t           cmd_op,
  output logic          cmd_ready,
  input  logic          batch_end,
  output strobes_t      stb,
  output logic [RA-1:0] row,
  output logic          busy,
  output logic          done,
  output logic          refresh_pending
);

  typedef enum logic [3:0] {
    S_IDLE,
    S_F0, S_F1, S_F2, S_F3,
    S_B0, S_B1, S_B2, S_B3, S_B4,
    S_U0, S_U1, S_U2,
    S_I0, S_I1,
    S_R
  } state_t;

  state_t        state;
  logic [BW-1:0] batch_cnt;
  logic          last_row;

  assign last_row  = row == RA'(ROWS - 1);
  assign cmd_ready = (state == S_IDLE) && !refresh_pending;
  assign busy      = state != S_IDLE;

  always_comb begin
    stb          = '0;
    stb.msb_fwd  = state == S_F0;
    stb.norm_fwd = state == S_F1;
    stb.act_fwd  = state == S_F2;
    stb.z_valid  = state == S_F3;
    stb.act_bwd  = state == S_B0;
    stb.norm_bwd = state == S_B1;
    stb.dya_cap  = state == S_B2;
    stb.msb_bwd  = state == S_B3;
    stb.dx_valid = state == S_B4;
    stb.lsb_rd   = (state == S_U0) || (state == S_I0);
    stb.opt_en   = state == S_U1;
    stb.wb_en    = (state == S_U2) || (state == S_I1);
    stb.wb_clear = state == S_I1;
    stb.msb_ref  = state == S_R;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_IDLE;
      row             <= '0;
      done            <= 1'b0;
      batch_cnt       <= '0;
      refresh_pending <= 1'b0;
    end else begin
      done <= 1'b0;
      if (batch_end) begin
        if (batch_cnt == BW'(REFRESH_BATCHES - 1)) begin
          batch_cnt       <= '0;
          refresh_pending <= 1'b1;
        end else begin
          batch_cnt <= batch_cnt + 1'b1;
        end
      end
      unique case (state)
        S_IDLE: begin
          row <= '0;
          if (refresh_pending) begin
            state           <= S_R;
            refresh_pending <= batch_end && (batch_cnt == BW'(REFRESH_BATCHES - 1));
          end else if (cmd_valid) begin
            unique case (cmd_op)
              OP_FWD:  state <= S_F0;
              OP_BWD:  state <= S_B0;
              OP_UPD:  state <= S_U0;
              OP_INIT: state <= S_I0;
            endcase
          end
        end
        S_F0: state <= S_F1;
        S_F1: state <= S_F2;
        S_F2: state <= S_F3;
        S_B0: state <= S_B1;
        S_B1: state <= S_B2;
        S_B2: state <= S_B3;
        S_B3: state <= S_B4;
        S_U0: state <= S_U1;
        S_U1: state <= S_U2;
        S_I0: state <= S_I1;
        S_F3, S_B4: state <= S_IDLE;
        S_U2, S_I1, S_R: begin
          if (last_row) state <= S_IDLE;
          else begin
            row   <= row + 1'b1;
            state <= (state == S_U2) ? S_U0 : (state == S_I1) ? S_I0 : S_R;
          end
        end
        default: state <= S_IDLE;
      endcase
      // done marks the last cycle of a command (not of a refresh)
      if ((state == S_F2) || (state == S_B3) ||
          (((state == S_U1) || (state == S_I0)) && last_row))
        done <= 1'b1;
    end
  end

  a_one_phase : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(
      {stb.msb_fwd, stb.norm_fwd, stb.act_fwd, stb.z_valid, stb.act_bwd, stb.norm_bwd,
       stb.dya_cap, stb.msb_bwd, stb.dx_valid, stb.lsb_rd, stb.opt_en, stb.wb_en, stb.msb_ref}))
    else $error("hic_ctrl: two datapath phases in one cycle");

endmodule

// lsb_rmw: the modify step of the read-modify-write on one LSB row.
//
// For each column it adds the quantized update dw to the sensed 7-bit signed
// LSB word. The new word is the low LSB_W bits of the sum (two's-complement
// wrap); the devices to flip are old XOR new. When the sum leaves the signed
// LSB_W-bit range the column overflows: ovf is set and ovf_neg says whether
// the carry is -1 (sum below -2^(LSB_W-1)) or +1 (above 2^(LSB_W-1)-1). The
// layer turns each overflow into one SET pulse of the MSB pair, G- for a
// negative carry and G+ for a positive one, so that MSB * 2^LSB_W + LSB is
// kept. With clear set the update is ignored, every set bit is flipped (the
// row becomes zero) and no overflow is raised. n_flips counts the devices
// toggled, for wear accounting. Purely combinational.
//
// From the paper: bit-flip update of the LSB array and MSB programming only on
// an LSB overflow. This design's own choices: the weighting of the two parts
// (one MSB level = 2^LSB_W LSB units) and the wrap on overflow.
module lsb_rmw
  import hic_pkg::*;
#(
  parameter int unsigned COLS = 64,
  localparam int unsigned FW  = $clog2(COLS * LSB_W + 1)
) (
  input  lsb_t            old_lsb [COLS],
  input  lsb_t            dw      [COLS],
  input  logic            clear,
  output lsb_t            flip    [COLS],
  output logic [COLS-1:0] ovf,
  output logic [COLS-1:0] ovf_neg,
  output logic [FW-1:0]   n_flips
);

  always_comb begin
    n_flips = '0;
    for (int j = 0; j < COLS; j++) begin
      logic signed [LSB_W:0] s;
      s = {old_lsb[j][LSB_W-1], old_lsb[j]} + {dw[j][LSB_W-1], dw[j]};
      if (clear) begin
        flip[j]    = old_lsb[j];
        ovf[j]     = 1'b0;
        ovf_neg[j] = 1'b0;
      end else begin
        flip[j]    = old_lsb[j] ^ s[LSB_W-1:0];
        ovf[j]     = s[LSB_W] != s[LSB_W-1];
        ovf_neg[j] = s[LSB_W];
      end
      n_flips += FW'($countones(flip[j]));
    end
  end

endmodule

// hic_pkg: widths, types and constants shared by the hybrid in-memory
// computing (HIC) training layer.
//
// A weight is held in two parts. The MSB part lives in a crossbar of
// differential pairs of multi-level PCM devices (G+ and G-, each a level
// 0..2^DEV_W-1), which performs the vector-matrix products. The LSB part is a
// 7-bit signed word stored in seven binary PCM devices. The full weight is
// MSB * 2^LSB_W + LSB: an LSB word that overflows carries one MSB level.
//
// From the paper: 8-bit DACs and ADCs, a 7-bit signed LSB word, an MSB pair of
// about 4-bit precision and a refresh of the MSB array every 10 batches.
// This design's own choices: DEV_W = 3 (pair difference -7..+7), the command
// set and the strobe bundle the controller drives.
package hic_pkg;

  localparam int unsigned X_W   = 8;   // DAC / ADC precision
  localparam int unsigned LSB_W = 7;   // binary PCM devices per LSB word
  localparam int unsigned DEV_W = 3;   // level bits of one multi-level PCM device
  localparam int unsigned REFRESH_PERIOD = 10;   // batches between MSB refreshes

  typedef logic signed [X_W-1:0]   code_t;   // DAC / ADC code
  typedef logic signed [LSB_W-1:0] lsb_t;    // LSB part of a weight
  typedef logic [DEV_W-1:0]        level_t;  // conductance level of one device

  // Commands accepted by the layer controller.
  typedef enum logic [1:0] {
    OP_FWD  = 2'd0,   // forward pass: Z = act(norm(ADC(X * W_msb)))
    OP_BWD  = 2'd1,   // backward pass: dX = ADC(W_msb * dY_A)
    OP_UPD  = 2'd2,   // row-by-row weight update into the LSB array
    OP_INIT = 2'd3    // clear the LSB array
  } op_t;

  // One-cycle strobes from the controller to the datapath.
  typedef struct packed {
    logic msb_fwd;    // crossbar forward VMM on the stored X
    logic norm_fwd;   // normalize the forward ADC codes
    logic act_fwd;    // apply the activation
    logic z_valid;    // Z is on the output
    logic act_bwd;    // activation derivative on the stored dZ
    logic norm_bwd;   // normalization backward
    logic dya_cap;    // capture dY_A for the transposed VMM and the update
    logic msb_bwd;    // crossbar transposed VMM
    logic dx_valid;   // dX is on the output
    logic lsb_rd;     // read one LSB row, compute its outer product
    logic opt_en;     // optimizer step on the gradient row
    logic wb_en;      // write the flips back, program MSB on overflow
    logic wb_clear;   // write-back clears the row instead (INIT)
    logic msb_ref;    // refresh one MSB row
  } strobes_t;

  // Width of a crossbar line current: n inputs of X_W bits times a pair
  // difference of DEV_W+1 bits, plus sign.
  function automatic int unsigned acc_width(int unsigned n);
    return $clog2(n + 1) + X_W + DEV_W + 1;
  endfunction

endpackage

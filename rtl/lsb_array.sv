// lsb_array: the array of binary PCM devices (C-PCM array) that holds the LSB
// part of every weight, one LSB_W-bit signed word per weight and one device
// per bit, read through one sense amplifier per bit column.
//
// It is accessed a row at a time. rd_en reads row rd_row; the sensed words
// appear on rd_data the next cycle and hold. A write never stores a value: as
// in the paper, it flips the state of the devices whose bit in wr_flip is 1
// and leaves the others untouched, so each device only sees a pulse when its
// bit changes. A read and a write in the same cycle to the same row read the
// old contents.
//
// There is no reset; the controller clears the array with a read followed by
// a write that flips every set bit. From the paper: binary devices, the
// flip-only write, row-by-row access, the SA per column. This design's own
// choices: one row per cycle and the read latency of one cycle.
module lsb_array
  import hic_pkg::*;
#(
  parameter int unsigned ROWS = 576,
  parameter int unsigned COLS = 64,
  localparam int unsigned RA  = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [RA-1:0] rd_row,
  output lsb_t          rd_data [COLS],
  input  logic          wr_en,
  input  logic [RA-1:0] wr_row,
  input  lsb_t          wr_flip [COLS]
);

  logic [COLS-1:0][LSB_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (rd_en)
      for (int j = 0; j < COLS; j++) rd_data[j] <= mem[rd_row][j];
    if (wr_en)
      for (int j = 0; j < COLS; j++) mem[wr_row][j] <= mem[wr_row][j] ^ wr_flip[j];
  end

endmodule

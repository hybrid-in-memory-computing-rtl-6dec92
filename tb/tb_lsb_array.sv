// tb_lsb_array: the array is not reset, so the testbench first reads every
// row to learn its contents, then applies random flip writes and reads and
// compares each read with a reference copy kept by XOR. Checks the one-cycle
// read latency, that rd_data holds while rd_en is low, and that a read in
// the same cycle as a write to the same row returns the old contents.
module tb_lsb_array;
  import hic_pkg::*;
  localparam int unsigned ROWS = 16;
  localparam int unsigned COLS = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic rd_en, wr_en;
  logic [$clog2(ROWS)-1:0] rd_row, wr_row;
  lsb_t rd_data [COLS], wr_flip [COLS];
  int ref_mem [ROWS][COLS];

  lsb_array #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .rd_en, .rd_row, .rd_data, .wr_en, .wr_row, .wr_flip);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(int r, string what);
    for (int j = 0; j < COLS; j++) begin
      checks++;
      if (int'(unsigned'(rd_data[j])) != ref_mem[r][j]) begin
        failures++;
        $display("FAIL %s row=%0d col=%0d got=%h exp=%h", what, r, j, rd_data[j], ref_mem[r][j]);
      end
    end
  endtask

  initial begin
    rd_en = 0; wr_en = 0; rd_row = '0; wr_row = '0;
    foreach (wr_flip[j]) wr_flip[j] = '0;
    @(negedge clk);
    // learn the power-up contents
    for (int r = 0; r < ROWS; r++) begin
      rd_en = 1; rd_row = r[$clog2(ROWS)-1:0];
      @(negedge clk);
      rd_en = 0;
      for (int j = 0; j < COLS; j++) ref_mem[r][j] = int'(unsigned'(rd_data[j]));
    end
    for (int t = 0; t < 1500; t++) begin
      int r, w;
      r = $urandom_range(0, ROWS - 1);
      w = ($urandom_range(0, 3) == 0) ? r : $urandom_range(0, ROWS - 1);
      rd_en = 1; rd_row = r[$clog2(ROWS)-1:0];
      wr_en = $urandom_range(0, 1); wr_row = w[$clog2(ROWS)-1:0];
      foreach (wr_flip[j]) wr_flip[j] = lsb_t'($urandom);
      @(negedge clk);
      rd_en = 0;
      cmp(r, "read");                       // old contents even if r == w
      if (wr_en) for (int j = 0; j < COLS; j++) ref_mem[w][j] ^= int'(unsigned'(wr_flip[j]));
      wr_en = 0;
      if (w != r) begin
        @(negedge clk);
        cmp(r, "hold");                     // rd_data holds while rd_en is low
      end
    end
    // read everything back
    for (int r = 0; r < ROWS; r++) begin
      rd_en = 1; rd_row = r[$clog2(ROWS)-1:0];
      @(negedge clk);
      cmp(r, "final");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

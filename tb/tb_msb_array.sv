// tb_msb_array: keeps a reference copy of every device level. Random SET
// pulses (row, mask, sign) drive devices up to saturation, which must raise
// prog_sat; refreshes must keep every pair difference and zero one device;
// forward and transposed products with random codes are compared with the
// reference sums, and the device levels are compared directly.
module tb_msb_array;
  import hic_pkg::*;
  localparam int unsigned ROWS = 8;
  localparam int unsigned COLS = 4;
  localparam int unsigned CW = acc_width(ROWS);
  localparam int unsigned RW = acc_width(COLS);
  localparam int unsigned RA = $clog2(ROWS);
  int checks = 0, failures = 0, n_sat = 0, n_ref = 0;
  logic clk = 0, rst_n = 0;
  logic fwd_en, bwd_en, prog_en, ref_en;
  logic [COLS-1:0] prog_sat;
  code_t row_in [ROWS], col_in [COLS];
  logic signed [CW-1:0] col_sum [COLS];
  logic signed [RW-1:0] row_sum [ROWS];
  logic [RA-1:0] prog_row, ref_row;
  logic [COLS-1:0] prog_mask, prog_neg;
  int gp [ROWS][COLS], gn [ROWS][COLS];

  msb_array #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .rst_n, .fwd_en, .row_in, .col_sum, .bwd_en, .col_in,
    .row_sum, .prog_en, .prog_row, .prog_mask, .prog_neg, .prog_sat, .ref_en, .ref_row);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse();
    int r, sat;
    logic [COLS-1:0] satm;
    r = $urandom_range(0, ROWS - 1);
    prog_row = r[RA-1:0]; prog_mask = COLS'($urandom); prog_neg = COLS'($urandom);
    if ($urandom_range(0, 1) == 0) prog_neg = '0;      // bias toward G+ to reach saturation
    sat = 0;
    satm = '0;
    for (int j = 0; j < COLS; j++)
      if (prog_mask[j]) begin
        if (!prog_neg[j]) begin if (gp[r][j] == 7) begin sat = 1; satm[j] = 1; end else gp[r][j]++; end
        else              begin if (gn[r][j] == 7) begin sat = 1; satm[j] = 1; end else gn[r][j]++; end
      end
    prog_en = 1;
    @(negedge clk);
    prog_en = 0;
    checks++;
    if (prog_sat != satm) begin failures++; $display("FAIL prog_sat=%b exp=%b", prog_sat, satm); end
    n_sat += sat;
  endtask

  task automatic refresh(int r);
    for (int j = 0; j < COLS; j++) begin
      int d;
      d = gp[r][j] - gn[r][j];
      gp[r][j] = (d > 0) ? d : 0;
      gn[r][j] = (d < 0) ? -d : 0;
    end
    ref_row = r[RA-1:0];
    ref_en = 1;
    @(negedge clk);
    ref_en = 0;
    n_ref++;
  endtask

  task automatic vmm();
    longint ec [COLS], er [ROWS];
    foreach (row_in[i]) row_in[i] = code_t'($urandom);
    foreach (col_in[j]) col_in[j] = code_t'($urandom);
    foreach (ec[j]) ec[j] = 0;
    foreach (er[i]) er[i] = 0;
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) begin
        ec[j] += longint'(row_in[i]) * (gp[i][j] - gn[i][j]);
        er[i] += longint'(col_in[j]) * (gp[i][j] - gn[i][j]);
      end
    fwd_en = 1; bwd_en = 1;
    @(negedge clk);
    fwd_en = 0; bwd_en = 0;
    foreach (row_in[i]) row_in[i] = code_t'($urandom);   // must not disturb the held sums
    @(negedge clk);
    foreach (col_sum[j]) begin
      checks++;
      if (longint'(col_sum[j]) != ec[j]) begin failures++; $display("FAIL col %0d got=%0d exp=%0d", j, col_sum[j], ec[j]); end
    end
    foreach (row_sum[i]) begin
      checks++;
      if (longint'(row_sum[i]) != er[i]) begin failures++; $display("FAIL row %0d got=%0d exp=%0d", i, row_sum[i], er[i]); end
    end
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) begin
        checks++;
        if (int'(dut.gp[i][j]) != gp[i][j] || int'(dut.gn[i][j]) != gn[i][j]) begin
          failures++;
          $display("FAIL levels %0d,%0d got %0d/%0d exp %0d/%0d", i, j, dut.gp[i][j], dut.gn[i][j], gp[i][j], gn[i][j]);
        end
      end
  endtask

  initial begin
    fwd_en = 0; bwd_en = 0; prog_en = 0; ref_en = 0;
    prog_row = '0; ref_row = '0; prog_mask = '0; prog_neg = '0;
    foreach (row_in[i]) row_in[i] = '0;
    foreach (col_in[j]) col_in[j] = '0;
    foreach (gp[i, j]) begin gp[i][j] = 0; gn[i][j] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    vmm();
    for (int round = 0; round < 40; round++) begin
      repeat ($urandom_range(1, 30)) pulse();
      vmm();
      if (round % 4 == 3) begin
        for (int r = 0; r < ROWS; r++) refresh(r);
        vmm();
      end
    end
    // extreme codes on a saturated array
    for (int r = 0; r < ROWS; r++) begin
      prog_row = r[RA-1:0]; prog_mask = '1; prog_neg = '0;
      repeat (8) begin
        for (int j = 0; j < COLS; j++) if (gp[r][j] < 7) gp[r][j]++;
        prog_en = 1; @(negedge clk); prog_en = 0;
      end
    end
    foreach (row_in[i]) row_in[i] = -128;
    vmm();
    checks++;
    if (n_sat == 0 || n_ref == 0) begin failures++; $display("FAIL saturation %0d refresh %0d", n_sat, n_ref); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

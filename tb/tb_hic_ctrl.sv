// tb_hic_ctrl: runs every command and checks the strobe sequence cycle by
// cycle and the command lengths (FWD 4, BWD 5, UPD 3*ROWS, INIT 2*ROWS);
// checks that a refresh becomes pending at every REFRESH_BATCHES-th
// batch_end, blocks cmd_ready, and refreshes rows 0..ROWS-1 one per cycle.
module tb_hic_ctrl;
  import hic_pkg::*;
  localparam int unsigned ROWS = 5;
  localparam int unsigned RB   = 3;
  int checks = 0, failures = 0, n_refresh = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, batch_end, busy, done, refresh_pending;
  op_t cmd_op;
  strobes_t stb;
  logic [$clog2(ROWS)-1:0] row;

  hic_ctrl #(.ROWS(ROWS), .REFRESH_BATCHES(RB)) dut (.clk, .rst_n, .cmd_valid, .cmd_op, .cmd_ready,
    .batch_end, .stb, .row, .busy, .done, .refresh_pending);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_stb(strobes_t e, int r, string what);
    checks++;
    if (stb != e || int'(row) != r) begin
      failures++;
      $display("FAIL %s: stb=%b exp=%b row=%0d exp=%0d", what, stb, e, row, r);
    end
  endtask

  function automatic strobes_t s(string n, logic clr = 0);
    strobes_t v = '0;
    case (n)
      "msb_fwd": v.msb_fwd = 1;   "norm_fwd": v.norm_fwd = 1; "act_fwd": v.act_fwd = 1;
      "z_valid": v.z_valid = 1;   "act_bwd": v.act_bwd = 1;   "norm_bwd": v.norm_bwd = 1;
      "dya_cap": v.dya_cap = 1;   "msb_bwd": v.msb_bwd = 1;   "dx_valid": v.dx_valid = 1;
      "lsb_rd": v.lsb_rd = 1;     "opt_en": v.opt_en = 1;     "wb_en": begin v.wb_en = 1; v.wb_clear = clr; end
      "msb_ref": v.msb_ref = 1;
      default: ;
    endcase
    return v;
  endfunction

  // Issues a command and checks the strobes of each of its cycles.
  task automatic run(op_t op);
    int n;
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = op;
    @(negedge clk);
    cmd_valid = 0;
    cmd_op = op_t'($urandom);
    n = 1;
    case (op)
      OP_FWD: begin
        expect_stb(s("msb_fwd"), 0, "F0"); @(negedge clk);
        expect_stb(s("norm_fwd"), 0, "F1"); @(negedge clk);
        expect_stb(s("act_fwd"), 0, "F2"); @(negedge clk);
        expect_stb(s("z_valid"), 0, "F3"); n = 4;
      end
      OP_BWD: begin
        expect_stb(s("act_bwd"), 0, "B0"); @(negedge clk);
        expect_stb(s("norm_bwd"), 0, "B1"); @(negedge clk);
        expect_stb(s("dya_cap"), 0, "B2"); @(negedge clk);
        expect_stb(s("msb_bwd"), 0, "B3"); @(negedge clk);
        expect_stb(s("dx_valid"), 0, "B4"); n = 5;
      end
      OP_UPD: begin
        for (int r = 0; r < ROWS; r++) begin
          if (r > 0) @(negedge clk);
          expect_stb(s("lsb_rd"), r, "U0"); @(negedge clk);
          expect_stb(s("opt_en"), r, "U1"); @(negedge clk);
          expect_stb(s("wb_en"), r, "U2");
        end
        n = 3 * ROWS;
      end
      OP_INIT: begin
        for (int r = 0; r < ROWS; r++) begin
          if (r > 0) @(negedge clk);
          expect_stb(s("lsb_rd"), r, "I0"); @(negedge clk);
          expect_stb(s("wb_en", 1), r, "I1");
        end
        n = 2 * ROWS;
      end
      default: ;
    endcase
    checks++;
    if (!done) begin failures++; $display("FAIL no done at the last cycle of op %0d (%0d cycles)", op, n); end
    @(negedge clk);
    checks++;
    if (done || busy) begin failures++; $display("FAIL still busy after op %0d", op); end
  endtask

  task automatic batch();
    batch_end = 1;
    @(negedge clk);
    batch_end = 0;
  endtask

  initial begin
    cmd_valid = 0; cmd_op = OP_FWD; batch_end = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (!cmd_ready || busy) begin failures++; $display("FAIL not ready after reset"); end
    for (int b = 1; b <= 2 * RB + 1; b++) begin
      run(OP_FWD); run(OP_BWD); run(OP_UPD);
      if (b == 1) run(OP_INIT);
      batch();
      if (b % RB == 0) begin
        checks++;
        if (!refresh_pending || cmd_ready) begin failures++; $display("FAIL refresh not pending after batch %0d", b); end
        @(negedge clk);
        for (int r = 0; r < ROWS; r++) begin
          expect_stb(s("msb_ref"), r, "R");
          @(negedge clk);
          n_refresh++;
        end
        checks++;
        if (!cmd_ready || refresh_pending) begin failures++; $display("FAIL not ready after refresh"); end
      end else begin
        checks++;
        if (refresh_pending) begin failures++; $display("FAIL early refresh after batch %0d", b); end
      end
    end
    checks++;
    if (n_refresh != 2 * ROWS) begin failures++; $display("FAIL refresh rows %0d", n_refresh); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

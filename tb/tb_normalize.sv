// tb_normalize: random per-column parameters and codes; forward and backward
// results against a real-arithmetic reference with floor division and
// saturation, the reset parameters (identity), and the batch statistics
// (sum, sum of squares, count) including their clear.
module tb_normalize;
  import hic_pkg::*;
  localparam int unsigned COLS = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic fwd_en, bwd_en, cfg_we, stat_clr;
  code_t y_a [COLS], y_n [COLS], dy_n [COLS], dy_a [COLS];
  logic [1:0] cfg_col;
  code_t cfg_mu, cfg_g, cfg_beta;
  logic signed [31:0] stat_sum [COLS];
  logic [31:0] stat_sq [COLS];
  logic [31:0] stat_n;
  int mu [COLS], g [COLS], beta [COLS];
  longint s_ref [COLS], q_ref [COLS];
  int n_ref;

  normalize #(.COLS(COLS)) dut (.clk, .rst_n, .fwd_en, .y_a, .y_n, .bwd_en, .dy_n, .dy_a,
    .cfg_we, .cfg_col, .cfg_mu, .cfg_g, .cfg_beta, .stat_clr, .stat_sum, .stat_sq, .stat_n);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat8(real v);
    if (v > 127.0) return 127;
    if (v < -128.0) return -128;
    return int'(v);
  endfunction

  task automatic fwd_bwd();
    int ef [COLS], eb [COLS];
    foreach (y_a[j]) begin
      y_a[j]  = code_t'($urandom);
      dy_n[j] = code_t'($urandom);
      ef[j] = sat8($floor(real'((int'(y_a[j]) - mu[j]) * g[j]) / 16.0) + real'(beta[j]));
      eb[j] = sat8($floor(real'(int'(dy_n[j]) * g[j]) / 16.0));
      s_ref[j] += int'(y_a[j]);
      q_ref[j] += int'(y_a[j]) * int'(y_a[j]);
    end
    n_ref++;
    fwd_en = 1; bwd_en = 1;
    @(negedge clk);
    fwd_en = 0; bwd_en = 0;
    foreach (y_n[j]) begin
      checks++;
      if (int'(y_n[j]) != ef[j]) begin
        failures++;
        $display("FAIL fwd j=%0d y=%0d mu=%0d g=%0d b=%0d got=%0d exp=%0d", j, y_a[j], mu[j], g[j], beta[j], y_n[j], ef[j]);
      end
      checks++;
      if (int'(dy_a[j]) != eb[j]) begin
        failures++;
        $display("FAIL bwd j=%0d dy=%0d g=%0d got=%0d exp=%0d", j, dy_n[j], g[j], dy_a[j], eb[j]);
      end
    end
  endtask

  task automatic check_stats();
    foreach (stat_sum[j]) begin
      checks++;
      if (longint'(stat_sum[j]) != s_ref[j] || longint'(stat_sq[j]) != q_ref[j]) begin
        failures++;
        $display("FAIL stats j=%0d sum=%0d/%0d sq=%0d/%0d", j, stat_sum[j], s_ref[j], stat_sq[j], q_ref[j]);
      end
    end
    checks++;
    if (int'(stat_n) != n_ref) begin failures++; $display("FAIL stat_n=%0d exp=%0d", stat_n, n_ref); end
  endtask

  initial begin
    fwd_en = 0; bwd_en = 0; cfg_we = 0; stat_clr = 0; cfg_col = '0;
    cfg_mu = '0; cfg_g = '0; cfg_beta = '0;
    foreach (y_a[j]) begin y_a[j] = '0; dy_n[j] = '0; mu[j] = 0; g[j] = 16; beta[j] = 0; s_ref[j] = 0; q_ref[j] = 0; end
    n_ref = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (50) fwd_bwd();          // identity after reset
    check_stats();
    for (int round = 0; round < 20; round++) begin
      for (int j = 0; j < COLS; j++) begin
        cfg_col = j[1:0];
        cfg_mu = code_t'($urandom); cfg_g = code_t'($urandom); cfg_beta = code_t'($urandom);
        mu[j] = int'(cfg_mu); g[j] = int'(cfg_g); beta[j] = int'(cfg_beta);
        cfg_we = 1;
        @(negedge clk);
        cfg_we = 0;
      end
      repeat (40) fwd_bwd();
      check_stats();
      if (round % 5 == 4) begin
        stat_clr = 1;
        @(negedge clk);
        stat_clr = 0;
        foreach (s_ref[j]) begin s_ref[j] = 0; q_ref[j] = 0; end
        n_ref = 0;
        check_stats();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_optimizer: checks the quantized SGD step against a reference in real
// arithmetic, dw = clamp(round_half_away(-lr * grad / 2^16), -64, 63), for
// random and edge gradients at several learning rates; checks the reset value
// of the learning rate (0.05 in Q0.16), loading, and the 0.45 decay.
module tb_optimizer;
  import hic_pkg::*;
  localparam int unsigned COLS = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic en, lr_load, lr_decay;
  logic signed [15:0] grad [COLS];
  lsb_t dw [COLS];
  logic [15:0] lr_in, lr;

  optimizer #(.COLS(COLS)) dut (.clk, .rst_n, .en, .grad, .dw, .lr_load, .lr_in, .lr_decay, .lr);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_dw(int g, int l);
    real t, q;
    t = -(real'(g) * real'(l)) / 65536.0;
    q = (t >= 0.0) ? $floor(t + 0.5) : -$floor(-t + 0.5);
    if (q > 63.0) q = 63.0;
    if (q < -64.0) q = -64.0;
    return int'(q);
  endfunction

  task automatic step(int edge_case);
    int e [COLS];
    foreach (grad[j]) begin
      grad[j] = 16'($urandom);
      if ($urandom_range(0, 2) == 0) grad[j] = 16'($signed(grad[j]) >>> $urandom_range(4, 14));
      if (edge_case == 1) grad[j] = (j == 0) ? -16'sd32768 : (j == 1) ? 16'sd32767 : (j == 2) ? 16'sd0 : -16'sd1;
      e[j] = ref_dw(int'(grad[j]), int'(lr));
    end
    en = 1;
    @(negedge clk);
    en = 0;
    foreach (dw[j]) begin
      checks++;
      if (int'(dw[j]) != e[j]) begin
        failures++;
        $display("FAIL lr=%0d grad=%0d dw=%0d exp=%0d", lr, grad[j], dw[j], e[j]);
      end
    end
  endtask

  initial begin
    int lr_exp;
    en = 0; lr_load = 0; lr_decay = 0; lr_in = '0;
    foreach (grad[j]) grad[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++;
    if (lr != 16'd3277) begin failures++; $display("FAIL reset lr=%0d", lr); end
    step(1);
    repeat (300) step(0);
    // decay by 0.45 (29491 / 65536), truncating
    lr_exp = int'(lr);
    for (int k = 0; k < 4; k++) begin
      lr_exp = int'($floor(real'(lr_exp) * 29491.0 / 65536.0));
      lr_decay = 1;
      @(negedge clk);
      lr_decay = 0;
      checks++;
      if (int'(lr) != lr_exp) begin failures++; $display("FAIL decay %0d lr=%0d exp=%0d", k, lr, lr_exp); end
      repeat (50) step(0);
    end
    // loaded learning rates, large and small
    for (int k = 0; k < 20; k++) begin
      lr_in = (k == 0) ? 16'hFFFF : 16'($urandom);
      lr_load = 1;
      @(negedge clk);
      lr_load = 0;
      checks++;
      if (lr != lr_in) begin failures++; $display("FAIL load lr=%0d", lr); end
      step(1);
      repeat (50) step(0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

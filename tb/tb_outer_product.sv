// tb_outer_product: random rows; each product is checked against integer
// multiplication one cycle after en, and the output must hold while en is low.
module tb_outer_product;
  import hic_pkg::*;
  localparam int unsigned COLS = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic en;
  code_t x;
  code_t dy [COLS];
  logic signed [15:0] grad [COLS];
  int expv [COLS];

  outer_product #(.COLS(COLS)) dut (.clk, .en, .x, .dy, .grad);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0;
    x = '0;
    foreach (dy[j]) dy[j] = '0;
    repeat (2) @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      x  = code_t'($urandom);
      if (t == 0) x = -128;
      foreach (dy[j]) begin
        dy[j] = code_t'($urandom);
        if (t == 0) dy[j] = (j % 2) ? -128 : 127;
        expv[j] = int'(x) * int'(dy[j]);
      end
      en = 1;
      @(negedge clk);
      en = 0;
      x = code_t'($urandom);          // changes while en is low must not matter
      foreach (dy[j]) begin
        checks++;
        if (int'(grad[j]) != expv[j]) begin
          failures++;
          $display("FAIL t=%0d j=%0d grad=%0d exp=%0d", t, j, grad[j], expv[j]);
        end
      end
      @(negedge clk);
      foreach (dy[j]) begin
        checks++;
        if (int'(grad[j]) != expv[j]) begin
          failures++;
          $display("FAIL hold t=%0d j=%0d", t, j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

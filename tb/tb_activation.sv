// tb_activation: forward ReLU and the backward mask against a reference,
// with random codes, one-cycle latency and a backward step that must use the
// mask of the last forward step.
module tb_activation;
  import hic_pkg::*;
  localparam int unsigned COLS = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic fwd_en, bwd_en;
  code_t y_n [COLS], z [COLS], dz [COLS], dy_n [COLS];
  int pos_ref [COLS];

  activation #(.COLS(COLS)) dut (.clk, .rst_n, .fwd_en, .y_n, .z, .bwd_en, .dz, .dy_n);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fwd_en = 0; bwd_en = 0;
    foreach (y_n[j]) begin y_n[j] = '0; dz[j] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      foreach (y_n[j]) begin
        y_n[j] = code_t'($urandom);
        if (j == 0) y_n[j] = '0;                 // zero is not positive
        pos_ref[j] = (int'(y_n[j]) > 0);
      end
      fwd_en = 1;
      @(negedge clk);
      fwd_en = 0;
      foreach (z[j]) begin
        checks++;
        if (int'(z[j]) != (pos_ref[j] ? int'(y_n[j]) : 0)) begin
          failures++;
          $display("FAIL fwd j=%0d y=%0d z=%0d", j, y_n[j], z[j]);
        end
      end
      foreach (y_n[j]) y_n[j] = code_t'($urandom);   // no fwd_en: mask must stay
      foreach (dz[j]) dz[j] = code_t'($urandom);
      bwd_en = 1;
      @(negedge clk);
      bwd_en = 0;
      foreach (dy_n[j]) begin
        checks++;
        if (int'(dy_n[j]) != (pos_ref[j] ? int'(dz[j]) : 0)) begin
          failures++;
          $display("FAIL bwd j=%0d dz=%0d dy=%0d", j, dz[j], dy_n[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

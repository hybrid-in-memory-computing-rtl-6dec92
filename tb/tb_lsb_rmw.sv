// tb_lsb_rmw: checks the modify step against an integer reference: the new
// word is old+dw, wrapped by 128 where it leaves [-64, 63]; the flip mask is
// old XOR new, the overflow flag and direction and the flip count follow.
// Also checks the clear mode. Random words plus every edge of the range.
module tb_lsb_rmw;
  import hic_pkg::*;
  localparam int unsigned COLS = 4;
  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0;
  lsb_t old_lsb [COLS], dw [COLS], flip [COLS];
  logic [COLS-1:0] ovf, ovf_neg;
  logic [$clog2(COLS*LSB_W+1)-1:0] n_flips;
  logic clear;

  lsb_rmw #(.COLS(COLS)) dut (.old_lsb, .dw, .clear, .flip, .ovf, .ovf_neg, .n_flips);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_check();
    int exp_flips = 0;
    #1;
    for (int j = 0; j < COLS; j++) begin
      int s, nw, e_ovf, e_neg, e_flip;
      s = int'(old_lsb[j]) + int'(dw[j]);
      e_ovf = 0; e_neg = 0; nw = s;
      if (clear) nw = 0;
      else if (s > 63)  begin e_ovf = 1; nw = s - 128; end
      else if (s < -64) begin e_ovf = 1; e_neg = 1; nw = s + 128; end
      e_flip = (int'(old_lsb[j]) ^ nw) & 127;
      exp_flips += $countones(e_flip);
      n_pos += (e_ovf && !e_neg);
      n_neg += e_neg;
      checks++;
      if (int'(unsigned'(flip[j])) != e_flip) begin
        failures++;
        $display("FAIL flip old=%0d dw=%0d clear=%0d flip=%h exp=%h", old_lsb[j], dw[j], clear, flip[j], e_flip);
      end
      checks++;
      if (ovf[j] != e_ovf[0] || (e_ovf != 0 && ovf_neg[j] != e_neg[0])) begin
        failures++;
        $display("FAIL ovf old=%0d dw=%0d ovf=%b neg=%b", old_lsb[j], dw[j], ovf[j], ovf_neg[j]);
      end
    end
    checks++;
    if (int'(n_flips) != exp_flips) begin
      failures++;
      $display("FAIL n_flips=%0d exp=%0d", n_flips, exp_flips);
    end
  endtask

  initial begin
    clear = 0;
    for (int a = -64; a < 64; a += 9)
      for (int b = -64; b < 64; b++) begin
        old_lsb[0] = lsb_t'(a); dw[0] = lsb_t'(b);
        for (int j = 1; j < COLS; j++) begin old_lsb[j] = lsb_t'($urandom); dw[j] = lsb_t'($urandom); end
        run_check();
      end
    repeat (500) begin
      clear = ($urandom_range(0, 4) == 0);
      foreach (old_lsb[j]) begin old_lsb[j] = lsb_t'($urandom); dw[j] = lsb_t'($urandom); end
      run_check();
    end
    checks++;
    if (n_pos == 0 || n_neg == 0) begin
      failures++;
      $display("FAIL no overflow of one sign seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

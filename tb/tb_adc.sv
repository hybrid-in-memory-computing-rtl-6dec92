// tb_adc: checks the ADC model against a reference in real arithmetic:
// code = clamp(floor((i + 2^(SHIFT-1)) / 2^SHIFT), -128, 127), for edge values
// and random currents, at SHIFT = 4 and SHIFT = 0.
module tb_adc;
  localparam int unsigned ACC_W = 22;
  int checks = 0, failures = 0;
  logic signed [ACC_W-1:0] i_in;
  logic signed [7:0] code4, code0;

  adc #(.ACC_W(ACC_W), .OUT_W(8), .SHIFT(4)) dut4 (.i_in, .code(code4));
  adc #(.ACC_W(ACC_W), .OUT_W(8), .SHIFT(0)) dut0 (.i_in, .code(code0));

  function automatic int ref_code(longint v, int shift);
    real r;
    longint q;
    r = $floor((real'(v) + (shift > 0 ? real'(2 ** (shift - 1)) : 0.0)) / real'(2 ** shift));
    q = longint'(r);
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return int'(q);
  endfunction

  task automatic check(longint v);
    i_in = ACC_W'(v);
    #1;
    checks++;
    if (int'(code4) != ref_code(v, 4)) begin
      failures++;
      $display("FAIL shift4 i=%0d code=%0d exp=%0d", v, code4, ref_code(v, 4));
    end
    checks++;
    if (int'(code0) != ref_code(v, 0)) begin
      failures++;
      $display("FAIL shift0 i=%0d code=%0d exp=%0d", v, code0, ref_code(v, 0));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint edges[] = '{0, 1, 7, 8, 9, -7, -8, -9, -1, 2031, 2032, 2040, -2048, -2049, -2056, -2057,
                        127, 128, -128, -129, 2097151, -2097152};
    foreach (edges[k]) check(edges[k]);
    repeat (2000) begin
      longint v;
      v = longint'($signed($urandom_range(0, 8191))) - 4096;
      if ($urandom_range(0, 3) == 0) v = v * 256;
      check(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

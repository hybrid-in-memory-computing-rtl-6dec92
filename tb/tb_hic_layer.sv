// tb_hic_layer: end-to-end test of one HIC training layer against a
// cycle-free reference model kept in the testbench.
//
// The reference holds the level of every MSB device, every LSB word, the
// normalization parameters and the learning rate, and recomputes each step:
//   forward  Z  = ReLU(sat(floor((ADC(X*W) - mu) * g / 16) + beta))
//   backward dX = ADC(W^T * sat(floor(ReLU'(dZ) * g / 16)))
//   update   dw = round_half_away(-lr * X[r] * dY_A[j] / 2^16) clamped to
//            [-64, 63]; LSB += dw, wrapping by 128 with one SET pulse on
//            G+ (positive carry) or G- (negative carry), lost if the device
//            is already at level 7
//   refresh  every REFRESH_BATCHES batches, each pair keeps G+ - G- on one
//            device
// It checks Z and dX, every device level and LSB word after each update, the
// command lengths (FWD 4, BWD 5, UPD 3*ROWS, INIT 2*ROWS cycles), the batch
// statistics and the event counters. Each mechanism must occur at least
// once: positive and negative LSB overflow, a saturated SET pulse, a
// refresh, LSB bit flips, the INIT clear, learning-rate decay, ReLU clamping
// and ADC saturation.
module tb_hic_layer;
  import hic_pkg::*;
  localparam int unsigned ROWS = 8;
  localparam int unsigned COLS = 4;
  localparam int unsigned RB   = 2;     // batches between refreshes
  localparam int unsigned FS   = 2;     // forward ADC shift
  localparam int unsigned BS   = 2;     // backward ADC shift
  localparam int unsigned NB   = 70;    // batches of training
  localparam int unsigned RA   = $clog2(ROWS);
  localparam int unsigned CA   = $clog2(COLS);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  logic cmd_valid, cmd_ready, busy, done, batch_end, refresh_pending;
  op_t  cmd_op;
  code_t x_in [ROWS], z_out [COLS], dz_in [COLS], dx_out [ROWS];
  logic z_valid, dx_valid;
  logic cfg_we, stat_clr, lr_load, lr_decay, host_prog_en;
  logic [CA-1:0] cfg_col;
  code_t cfg_mu, cfg_g, cfg_beta;
  logic signed [31:0] stat_sum [COLS];
  logic [31:0] stat_sq [COLS], stat_n;
  logic [15:0] lr_in, lr;
  logic [RA-1:0] host_prog_row;
  logic [COLS-1:0] host_prog_mask, host_prog_neg;
  logic [31:0] cnt_overflow, cnt_flips, cnt_sat, cnt_refresh;

  hic_layer #(.ROWS(ROWS), .COLS(COLS), .FWD_SHIFT(FS), .BWD_SHIFT(BS), .REFRESH_BATCHES(RB)) dut (.*);

  always #5 clk = ~clk;

  // ---------------- reference model ----------------
  int gp [ROWS][COLS], gn [ROWS][COLS], lsb [ROWS][COLS];
  int mu [COLS], g [COLS], beta [COLS];
  int lr_ref;
  int x [ROWS], dya [COLS], pos [COLS];
  int batches = 0;
  bit hold = 0;       // no batch_end, hence no refresh: lets the pairs saturate
  longint e_ovf = 0, e_flips = 0, e_sat = 0, e_refresh = 0;
  longint s_sum [COLS], s_sq [COLS];
  int s_n = 0;
  // mechanism counters
  int m_ovf_pos = 0, m_ovf_neg = 0, m_sat = 0, m_refresh = 0, m_flip = 0;
  int m_init = 0, m_decay = 0, m_relu = 0, m_adcsat = 0;

  function automatic int sat8(longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic int fdiv(longint a, int shift);   // floor(a / 2^shift)
    return int'($floor(real'(a) / real'(2 ** shift)));
  endfunction

  function automatic int adc_ref(longint i, int shift);
    longint q;
    q = longint'($floor((real'(i) + ((shift > 0) ? real'(2 ** (shift - 1)) : 0.0)) / real'(2 ** shift)));
    if (q > 127 || q < -128) m_adcsat++;
    return sat8(q);
  endfunction

  function automatic int quant(int grad, int l);
    real t, q;
    t = -(real'(grad) * real'(l)) / 65536.0;
    q = (t >= 0.0) ? $floor(t + 0.5) : -$floor(-t + 0.5);
    if (q > 63.0) q = 63.0;
    if (q < -64.0) q = -64.0;
    return int'(q);
  endfunction

  // ---------------- stimulus helpers ----------------
  task automatic command(op_t op, int exp_cycles);
    int n;
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = op;
    @(negedge clk);
    cmd_valid = 0;
    n = 1;
    while (!done && n < 100000) begin @(negedge clk); n++; end
    checks++;
    if (n != exp_cycles) begin failures++; $display("FAIL op %s took %0d cycles, exp %0d", op.name(), n, exp_cycles); end
  endtask

  task automatic forward();
    longint acc;
    int ya, yn;
    foreach (x_in[i]) begin
      x_in[i] = code_t'($urandom);
      if ($urandom_range(0, 1) == 0) x_in[i] = code_t'(int'(x_in[i]) / 4);
      x[i] = int'(x_in[i]);
    end
    command(OP_FWD, 4);
    checks++;
    if (!z_valid) begin failures++; $display("FAIL z_valid low"); end
    foreach (x_in[i]) x_in[i] = code_t'($urandom);       // X is latched
    for (int j = 0; j < COLS; j++) begin
      acc = 0;
      for (int i = 0; i < ROWS; i++) acc += longint'(x[i]) * (gp[i][j] - gn[i][j]);
      ya = adc_ref(acc, FS);
      yn = sat8(longint'(fdiv(longint'(ya - mu[j]) * g[j], 4)) + beta[j]);
      pos[j] = yn > 0;
      if (yn < 0) m_relu++;
      s_sum[j] += ya;
      s_sq[j]  += ya * ya;
      checks++;
      if (int'(z_out[j]) != (pos[j] ? yn : 0)) begin
        failures++;
        $display("FAIL Z[%0d]=%0d exp=%0d (sum %0d)", j, z_out[j], pos[j] ? yn : 0, acc);
      end
    end
    s_n++;
  endtask

  task automatic backward();
    longint acc;
    int dz [COLS];
    foreach (dz_in[j]) begin
      dz_in[j] = code_t'($urandom);
      dz[j] = int'(dz_in[j]);
    end
    command(OP_BWD, 5);
    checks++;
    if (!dx_valid) begin failures++; $display("FAIL dx_valid low"); end
    for (int j = 0; j < COLS; j++) dya[j] = sat8(fdiv(longint'(pos[j] ? dz[j] : 0) * g[j], 4));
    for (int i = 0; i < ROWS; i++) begin
      int e;
      acc = 0;
      for (int j = 0; j < COLS; j++) acc += longint'(dya[j]) * (gp[i][j] - gn[i][j]);
      e = adc_ref(acc, BS);
      checks++;
      if (int'(dx_out[i]) != e) begin failures++; $display("FAIL dX[%0d]=%0d exp=%0d", i, dx_out[i], e); end
    end
  endtask

  task automatic check_state(string what);
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) begin
        checks++;
        if (int'(dut.u_msb.gp[i][j]) != gp[i][j] || int'(dut.u_msb.gn[i][j]) != gn[i][j] ||
            int'($signed(dut.u_lsb.mem[i][j])) != lsb[i][j]) begin
          failures++;
          $display("FAIL %s cell %0d,%0d: G+ %0d/%0d G- %0d/%0d LSB %0d/%0d", what, i, j,
                   dut.u_msb.gp[i][j], gp[i][j], dut.u_msb.gn[i][j], gn[i][j],
                   $signed(dut.u_lsb.mem[i][j]), lsb[i][j]);
        end
      end
  endtask

  task automatic update();
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) begin
        int dw, s, nw;
        dw = quant(x[i] * dya[j], lr_ref);
        s = lsb[i][j] + dw;
        nw = s;
        if (s > 63) begin
          nw = s - 128; e_ovf++; m_ovf_pos++;
          if (gp[i][j] == 7) begin e_sat++; m_sat++; end else gp[i][j]++;
        end else if (s < -64) begin
          nw = s + 128; e_ovf++; m_ovf_neg++;
          if (gn[i][j] == 7) begin e_sat++; m_sat++; end else gn[i][j]++;
        end
        e_flips += $countones((lsb[i][j] ^ nw) & 127);
        if (lsb[i][j] != nw) m_flip++;
        lsb[i][j] = nw;
      end
    command(OP_UPD, 3 * ROWS);
    @(negedge clk);
    check_state("update");
  endtask

  task automatic end_batch();
    batch_end = 1;
    @(negedge clk);
    batch_end = 0;
    batches++;
    if (batches % RB == 0) begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) begin
          int d;
          d = gp[i][j] - gn[i][j];
          gp[i][j] = (d > 0) ? d : 0;
          gn[i][j] = (d < 0) ? -d : 0;
        end
      e_refresh += ROWS;
      m_refresh++;
      while (!cmd_ready) @(negedge clk);
      check_state("refresh");
    end
  endtask

  task automatic host_pulse(int r, logic [COLS-1:0] mask, logic [COLS-1:0] neg);
    for (int j = 0; j < COLS; j++)
      if (mask[j]) begin
        if (!neg[j]) begin if (gp[r][j] == 7) e_sat++; else gp[r][j]++; end
        else         begin if (gn[r][j] == 7) e_sat++; else gn[r][j]++; end
      end
    host_prog_row = r[RA-1:0]; host_prog_mask = mask; host_prog_neg = neg;
    host_prog_en = 1;
    @(negedge clk);
    host_prog_en = 0;
  endtask

  task automatic set_norm(int j, int m, int gg, int b);
    cfg_col = j[CA-1:0]; cfg_mu = code_t'(m); cfg_g = code_t'(gg); cfg_beta = code_t'(b);
    mu[j] = m; g[j] = gg; beta[j] = b;
    cfg_we = 1;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic check_counters();
    @(negedge clk);                      // cnt_sat follows the pulse by a cycle
    checks++;
    if (cnt_overflow != 32'(e_ovf) || cnt_flips != 32'(e_flips) || cnt_sat != 32'(e_sat) ||
        cnt_refresh != 32'(e_refresh)) begin
      failures++;
      $display("FAIL counters ovf %0d/%0d flips %0d/%0d sat %0d/%0d refresh %0d/%0d",
               cnt_overflow, e_ovf, cnt_flips, e_flips, cnt_sat, e_sat, cnt_refresh, e_refresh);
    end
    for (int j = 0; j < COLS; j++) begin
      checks++;
      if (longint'(stat_sum[j]) != s_sum[j] || longint'(stat_sq[j]) != s_sq[j]) begin
        failures++;
        $display("FAIL stats col %0d: sum %0d/%0d sq %0d/%0d", j, stat_sum[j], s_sum[j], stat_sq[j], s_sq[j]);
      end
    end
    checks++;
    if (int'(stat_n) != s_n) begin failures++; $display("FAIL stat_n %0d/%0d", stat_n, s_n); end
  endtask

  task automatic mech(string name, int n);
    checks++;
    $display("mechanism %-14s occurred %0d times", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism %s never occurred", name); end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- test ----------------
  initial begin
    cmd_valid = 0; cmd_op = OP_FWD; batch_end = 0;
    cfg_we = 0; stat_clr = 0; lr_load = 0; lr_decay = 0; host_prog_en = 0;
    cfg_col = '0; cfg_mu = '0; cfg_g = '0; cfg_beta = '0; lr_in = '0;
    host_prog_row = '0; host_prog_mask = '0; host_prog_neg = '0;
    foreach (x_in[i]) x_in[i] = '0;
    foreach (dz_in[j]) dz_in[j] = '0;
    foreach (gp[i, j]) begin gp[i][j] = 0; gn[i][j] = 0; lsb[i][j] = 0; end
    foreach (mu[j]) begin mu[j] = 0; g[j] = 16; beta[j] = 0; s_sum[j] = 0; s_sq[j] = 0; end
    lr_ref = 3277;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (lr != 16'd3277) begin failures++; $display("FAIL reset lr %0d", lr); end

    // clear the LSB array (its power-up state is arbitrary)
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) e_flips += $countones(dut.u_lsb.mem[i][j]);
    command(OP_INIT, 2 * ROWS);
    m_init++;
    @(negedge clk);
    check_state("init");

    // initial weights by host SET pulses
    for (int i = 0; i < ROWS; i++)
      repeat (4) host_pulse(i, COLS'($urandom), COLS'($urandom));
    check_state("host program");

    // normalization parameters: a mix of identity and random
    for (int j = 0; j < COLS; j++)
      if (j % 2) set_norm(j, $urandom_range(0, 20) - 10, $urandom_range(8, 40), $urandom_range(0, 20) - 10);

    // a large learning rate so that updates overflow the LSB words often
    lr_in = 16'd20000;
    lr_load = 1;
    @(negedge clk);
    lr_load = 0;
    lr_ref = 20000;

    for (int b = 0; b < NB; b++) begin
      // batches 2..41: full-scale learning rate and no refresh, so that both
      // devices of a pair climb and reach their top level
      if (b == 2 || b == 42) begin
        hold = (b == 2);
        lr_in = hold ? 16'hFFFF : 16'd20000;
        lr_load = 1;
        @(negedge clk);
        lr_load = 0;
        lr_ref = int'(lr_in);
      end
      forward();
      backward();
      update();
      if (!hold) end_batch();
      if (b % 10 == 9 && !hold) begin
        lr_decay = 1;
        @(negedge clk);
        lr_decay = 0;
        lr_ref = int'($floor(real'(lr_ref) * 29491.0 / 65536.0));
        m_decay++;
        checks++;
        if (int'(lr) != lr_ref) begin failures++; $display("FAIL lr after decay %0d/%0d", lr, lr_ref); end
      end
      check_counters();
    end

    // clear statistics, clear LSB again, one more step
    stat_clr = 1;
    @(negedge clk);
    stat_clr = 0;
    foreach (s_sum[j]) begin s_sum[j] = 0; s_sq[j] = 0; end
    s_n = 0;
    command(OP_INIT, 2 * ROWS);
    foreach (lsb[i, j]) begin
      e_flips += $countones(lsb[i][j] & 127);
      lsb[i][j] = 0;
    end
    m_init++;
    @(negedge clk);
    check_state("second init");
    forward();
    backward();
    update();
    check_counters();

    mech("overflow+", m_ovf_pos);
    mech("overflow-", m_ovf_neg);
    mech("saturation", m_sat);
    mech("refresh", m_refresh);
    mech("bit flips", m_flip);
    mech("lsb init", m_init);
    mech("lr decay", m_decay);
    mech("relu clamp", m_relu);
    mech("adc saturate", m_adcsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

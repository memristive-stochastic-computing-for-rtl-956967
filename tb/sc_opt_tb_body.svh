// sc_opt_tb_body.svh: end-to-end test of sc_param_optimizer, shared by the reduced-size and
// the full-size testbench. The including module declares N_TILES, ROWS, COLS, TICKS_PER_TAU,
// N, the signals below the dut needs, and instantiates it as `dut`.
//
// Sequence: load random initial weights; three SGD updates with the learning rate 0.5 and
// random gradients in [-1, 1]; a fourth update whose gradients drive some weights past +1 or
// -1 (clip) and whose gradient -1 on row 0 needs a zero-length pulse. Each new weight is
// compared with clip(theta_{n-1} - eta * grad) computed here from the previous reported
// value, within a bound made of six standard deviations of the stochastic estimate and the
// encoder's resolution; the RMS error of each update must be within two standard
// deviations. Each row's cycle count is checked against n_g + n_w + 8. The mechanisms
// (load, update, bank swap, reset of consumed rows during programming, two-step sensing,
// zero-length pulse, clip) are counted and each must occur.

  localparam int  TICK_LIMIT = 40000000;
  real eta;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, val_valid = 0, val_ready;
  cmd_t cmd = CMD_LOAD;
  val_t val_data = '0;
  logic [N-1:0] eta_stream, sel_stream;
  logic [1:0] up_shift = 2'd1;
  logic res_valid, res_sat, busy, bank;
  row_t res_row;
  val_t res_data;

  int checks = 0, failures = 0, cycles = 0;
  int n_load = 0, n_update = 0, n_swap = 0, n_reset_during_prog = 0, n_two_phase = 0;
  int n_zero_pulse = 0, n_clip = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  // fresh -eta and select streams for every decode step
  always @(negedge clk) begin
    if (dut.u_ctrl.dec_in_valid) begin
      int eta_thr;
      eta_thr = int'((1.0 - eta) / 2.0 * 65536.0);
      for (int i = 0; i < N; i++) begin
        eta_stream[i] = ($urandom % 65536) < eta_thr;
        sel_stream[i] = 1'($urandom);
      end
    end
  end

  // mechanism monitors
  logic bank_q = 0, phase0_seen = 0;
  int   t_accept = 0;
  always @(posedge clk) if (rst_n) begin
    bank_q <= bank;
    if (bank != bank_q) n_swap++;
    if (dut.u_ctrl.sense && !dut.u_ctrl.sense_phase) phase0_seen <= 1'b1;
    if (dut.u_ctrl.sense && dut.u_ctrl.sense_phase && phase0_seen) begin
      n_two_phase++;
      phase0_seen <= 1'b0;
    end
    if ((dut.u_ctrl.g_ctrl[bank].rst && dut.u_ctrl.w_ctrl[bank].rst) && dut.u_ctrl.wenc_start)
      n_reset_during_prog++;
    if (dut.u_genc.done && dut.u_genc.width == '0) n_zero_pulse++;
    if (res_valid && res_sat) n_clip++;
    // row timing in an update: value accepted ... weight pulse done
    if (val_valid && val_ready && cmd == CMD_UPDATE) t_accept <= cycles;
    if (dut.u_wenc.done && cmd == CMD_UPDATE) begin
      checks++;
      if (cycles - t_accept != int'(dut.u_genc.width) + int'(dut.u_wenc.width) + 7) begin
        failures++;
        $display("row timing: %0d cycles, n_g=%0d n_w=%0d", cycles - t_accept + 1,
                 dut.u_genc.width, dut.u_wenc.width);
      end
    end
  end

  real theta [ROWS];

  function automatic val_t to_val(real v);
    return val_t'(int'($floor(v * real'(VAL_ONE) + 0.5)));
  endfunction

  function automatic real to_real(val_t v);
    return real'(v) / real'(VAL_ONE);
  endfunction

  function automatic real clip1(real v);
    return (v > 1.0) ? 1.0 : (v < -1.0) ? -1.0 : v;
  endfunction

  task automatic issue(cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(posedge clk); #1 cmd_valid = 0;
  endtask

  task automatic send(val_t v);
    @(negedge clk); val_data = v; val_valid = 1;
    while (!val_ready) @(negedge clk);
    @(posedge clk); #1 val_valid = 0;
  endtask

  task automatic do_load();
    issue(CMD_LOAD);
    for (int r = 0; r < ROWS; r++) begin
      theta[r] = to_real(to_val((real'($urandom % 1601) - 800.0) / 1000.0));
      send(to_val(theta[r]));
    end
    wait (!busy);
    n_load++;
  endtask

  // one update with the given gradients; checks every new weight
  task automatic do_update(real grads [ROWS]);
    real sq, sigma_max;
    logic b;
    b = bank;
    sq = 0.0; sigma_max = 0.0;
    issue(CMD_UPDATE);
    for (int r = 0; r < ROWS; r++) begin
      real want, got, p_out, sigma, tol;
      send(to_val(grads[r]));
      while (!res_valid) @(negedge clk);
      want  = clip1(theta[r] - eta * grads[r]);
      got   = to_real(res_data);
      // one-probability of the summed stream, std of the decoded and upscaled estimate
      p_out = 0.5 * (1.0 - eta * clip1(grads[r]) + 1.0) / 2.0 + 0.5 * (theta[r] + 1.0) / 2.0;
      sigma = 4.0 * $sqrt(p_out * (1.0 - p_out) / real'(N));
      if (sigma > sigma_max) sigma_max = sigma;
      tol   = 6.0 * sigma + 0.03;
      checks++;
      if (int'(res_row) != r) begin failures++; $display("row %0d reported as %0d", r, res_row); end
      checks++;
      if (got - want > tol || want - got > tol) begin
        failures++;
        $display("row %0d: theta %f grad %f -> %f, expected %f (tol %f)", r, theta[r], grads[r], got, want, tol);
      end
      sq += (got - want) * (got - want);
      theta[r] = got;
      @(negedge clk);
    end
    wait (!busy);
    n_update++;
    checks++;
    if ($sqrt(sq / real'(ROWS)) > 2.0 * sigma_max + 0.02) begin
      failures++;
      $display("update %0d: rms error %f", n_update, $sqrt(sq / real'(ROWS)));
    end else begin
      $display("eta %5.3f update %0d: rms error %f (sigma %f)", eta, n_update, $sqrt(sq / real'(ROWS)), sigma_max);
    end
    checks++;
    if (bank == b) begin failures++; $display("bank not swapped after update"); end
  endtask

  task automatic expect_seen(string what, int n);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("mechanism never happened: %s", what); end
  endtask

  // The whole test; the including module calls it, then reports and finishes.
  task automatic run_all();
    real g [ROWS];
    eta_stream = '0; sel_stream = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < N_ETA; e++) begin
      int clips_before;
      eta = ETA_LIST[e];
      do_load();
      for (int u = 0; u < 3; u++) begin
        for (int r = 0; r < ROWS; r++) g[r] = (real'($urandom % 2001) - 1000.0) / 1000.0;
        do_update(g);
      end
      // push weights towards the bounds: gradient -1 (zero-length pulse) or +1
      for (int r = 0; r < ROWS; r++) g[r] = (r % 2 == 0) ? -1.0 : 1.0;
      clips_before = n_clip;
      for (int u = 0; u < 40 && n_clip == clips_before; u++) do_update(g);
    end
    expect_seen("weight load", n_load);
    expect_seen("SGD update", n_update);
    expect_seen("bank swap", n_swap);
    expect_seen("reset while programming", n_reset_during_prog);
    expect_seen("two-step sensing", n_two_phase);
    expect_seen("zero-length pulse", n_zero_pulse);
    expect_seen("clip to +-1", n_clip);
    $display("simulated %0d cycles", cycles);
  endtask

  initial begin
    wait (cycles == TICK_LIMIT);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

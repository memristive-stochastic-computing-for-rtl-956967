// tb_update_controller: runs a load and two updates of a 4-row controller against simple
// models of the encoders (a pulse of n = value[3:0] + 1 ticks, then done) and of the
// decoder (result two cycles after in_valid), and checks per row: the reset of the row about
// to be loaded, the pulse count reaching the right bank's row, the two sense phases in
// order, the reset of the consumed gradient and weight rows, the new weight going to the
// other weight bank, the reported row and value, the cycle count n_g + n_w + 8, and the
// bank swap at the end of each update.
module tb_update_controller;
  import sc_pkg::*;
  localparam int ROWS = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, val_valid = 0, val_ready;
  cmd_t cmd;
  val_t val_data;
  logic genc_start, genc_prog, genc_done, wenc_start, wenc_prog, wenc_done;
  val_t genc_value, wenc_value;
  tile_ctrl_t g_ctrl [2], w_ctrl [2];
  logic bank, sense, sense_phase, dec_in_valid, dec_out_valid, res_valid, busy;
  val_t dec_out, res_data;
  row_t res_row;
  int checks = 0, failures = 0, cycles = 0;

  update_controller #(.ROWS(ROWS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  // encoder models
  int gcnt = 0, wcnt = 0;
  logic gdone_r = 0, wdone_r = 0;
  assign genc_prog = gcnt > 0;
  assign wenc_prog = wcnt > 0;
  assign genc_done = gdone_r;
  assign wenc_done = wdone_r;
  always @(posedge clk) begin
    gdone_r <= (gcnt == 1);
    wdone_r <= (wcnt == 1);
    if (genc_start) gcnt <= int'(genc_value[3:0]) + 1; else if (gcnt > 0) gcnt <= gcnt - 1;
    if (wenc_start) wcnt <= int'(wenc_value[3:0]) + 1; else if (wcnt > 0) wcnt <= wcnt - 1;
  end
  // decoder model: theta_n = value fed to it (gradient) + 3, two cycles later
  logic [1:0] dv = '0;
  val_t dval [2];
  always @(posedge clk) begin
    dv <= {dv[0], dec_in_valid};
    dval[0] <= val_data + 3;  // gradient of the current row is still on val_data
    dval[1] <= dval[0];
  end
  assign dec_out_valid = dv[1];
  assign dec_out = dval[1];

  // per-row observations
  int g_prog_cnt [2][ROWS], w_prog_cnt [2][ROWS], g_rst [2][ROWS], w_rst [2][ROWS];
  int sense_seq [$];
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < 2; k++) begin
      if (g_ctrl[k].prog) g_prog_cnt[k][g_ctrl[k].row]++;
      if (w_ctrl[k].prog) w_prog_cnt[k][w_ctrl[k].row]++;
      if (g_ctrl[k].rst)  g_rst[k][g_ctrl[k].row]++;
      if (w_ctrl[k].rst)  w_rst[k][w_ctrl[k].row]++;
    end
    if (sense) sense_seq.push_back(int'(sense_phase) + 2 * int'(g_ctrl[0].row));
    checks++;
    if ((g_ctrl[0].prog || g_ctrl[1].prog) && (w_ctrl[0].prog || w_ctrl[1].prog)) begin
      failures++; $display("gradient and weight pulses at once");
    end
  end

  task automatic clear_obs();
    for (int k = 0; k < 2; k++) for (int r = 0; r < ROWS; r++) begin
      g_prog_cnt[k][r] = 0; w_prog_cnt[k][r] = 0; g_rst[k][r] = 0; w_rst[k][r] = 0;
    end
    sense_seq.delete();
  endtask

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic issue(cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(posedge clk); #1 cmd_valid = 0;
  endtask

  int vals [ROWS];

  task automatic do_load();
    logic b;
    b = bank;
    clear_obs();
    issue(CMD_LOAD);
    for (int r = 0; r < ROWS; r++) begin
      vals[r] = $urandom % 16;
      @(negedge clk); val_data = val_t'(vals[r]); val_valid = 1;
      while (!val_ready) @(negedge clk);
      @(posedge clk); #1 val_valid = 0;
    end
    wait (!busy);
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      expect_eq("load reset", w_rst[b][r], 1);
      expect_eq("load pulse", w_prog_cnt[b][r], vals[r] + 1);
      expect_eq("load other bank untouched", w_prog_cnt[!b][r], 0);
    end
    expect_eq("load keeps bank", int'(bank), int'(b));
  endtask

  task automatic do_update();
    logic b;
    int t0, nres;
    b = bank;
    clear_obs();
    issue(CMD_UPDATE);
    for (int r = 0; r < ROWS; r++) begin
      int g;
      g = $urandom % 16;
      @(negedge clk); val_data = val_t'(g); val_valid = 1;
      t0 = cycles;
      while (!val_ready) @(negedge clk);
      @(posedge clk); #1 val_valid = 0;
      // keep the gradient on val_data for the decoder model; wait for the result
      while (!res_valid) @(negedge clk);
      expect_eq("result row", int'(res_row), r);
      expect_eq("result value", int'(res_data), g + 3);
      while (!(val_ready || !busy)) @(negedge clk);
      // cycles from the row's value being offered to the next row being ready
      expect_eq("row cycles", cycles - t0, (g + 1) + ((g + 3) % 16 + 1) + 8);
      expect_eq("gradient pulse on read bank", g_prog_cnt[b][r], g + 1);
      expect_eq("new weight to other bank", w_prog_cnt[!b][r], (g + 3) % 16 + 1);
      expect_eq("no write into read bank", w_prog_cnt[b][r], 0);
      expect_eq("gradient row reset", g_rst[b][r], 1);
      expect_eq("weight row reset", w_rst[b][r], 1);
    end
    wait (!busy);
    @(negedge clk);
    expect_eq("bank swapped", int'(bank), int'(!b));
    expect_eq("sense steps", sense_seq.size(), 2 * ROWS);
    for (int i = 0; i < sense_seq.size(); i++)
      expect_eq("sense order (phase + 2*row)", sense_seq[i], (i % 2) + 2 * (i / 2));
  endtask

  initial begin
    val_data = '0; cmd = CMD_LOAD;
    repeat (2) @(posedge clk);
    rst_n = 1;
    expect_eq("idle ready", int'(cmd_ready), 1);
    do_load();
    do_update();
    do_update();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rram_tile: programs rows of a tile model with pulses of different lengths and checks
// that the fraction of cells switched on matches 1 - exp(-n/TICKS_PER_TAU) within
// statistical bounds, that switching never reverses and touches only the opened row, that
// a longer pulse switches more cells, and that a row reset turns the whole row off
// (also when a pulse is applied in the same cycle).
module tb_rram_tile;
  import sc_pkg::*;
  localparam int ROWS = 8, COLS = 2048, TPT = 64;
  logic clk = 0;
  tile_ctrl_t ctrl;
  logic [COLS-1:0] row_on;
  int checks = 0, failures = 0, cycles = 0;

  rram_tile #(.ROWS(ROWS), .COLS(COLS), .TICKS_PER_TAU(TPT)) dut (.clk, .ctrl, .row_on);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  int pulses [ROWS] = '{0, 8, 22, 44, 64, 100, 180, 355};

  task automatic count_row(input int r, output int n);
    ctrl.row = row_t'(r);
    #1;
    n = $countones(row_on);
  endtask

  initial begin
    ctrl = '{row: '0, prog: 1'b0, rst: 1'b0};
    @(negedge clk);
    // initially all off
    for (int r = 0; r < ROWS; r++) begin
      int n;
      count_row(r, n);
      checks++;
      if (n != 0) begin failures++; $display("row %0d not off at start", r); end
    end
    // program each row with its pulse length
    for (int r = 0; r < ROWS; r++) begin
      ctrl.row = row_t'(r);
      for (int k = 0; k < pulses[r]; k++) begin
        ctrl.prog = 1;
        @(negedge clk);
      end
      ctrl.prog = 0;
      @(negedge clk);
    end
    // statistics per row
    for (int r = 0; r < ROWS; r++) begin
      real p, f, tol;
      int n;
      count_row(r, n);
      p = 1.0 - $exp(-real'(pulses[r]) / real'(TPT));
      f = real'(n) / real'(COLS);
      tol = 5.0 * $sqrt(p * (1.0 - p) / real'(COLS)) + 0.002;
      checks++;
      if (f - p > tol || p - f > tol) begin
        failures++;
        $display("row %0d: %0d ticks switched %f, expected %f", r, pulses[r], f, p);
      end
    end
    // extending a pulse keeps every cell that was on
    begin
      logic [COLS-1:0] prev_on;
      ctrl.row = 3; #1 prev_on = row_on;
      for (int k = 0; k < 30; k++) begin ctrl.prog = 1; @(negedge clk); end
      ctrl.prog = 0; #1;
      checks++;
      if ((prev_on & ~row_on) != '0) begin failures++; $display("a cell switched back off"); end
      checks++;
      if ($countones(row_on) <= $countones(prev_on)) begin failures++; $display("longer pulse switched no more cells"); end
    end
    // reset of row 5 only (with prog also high: reset wins)
    ctrl.row = 5; ctrl.rst = 1; ctrl.prog = 1;
    @(negedge clk);
    ctrl.rst = 0; ctrl.prog = 0;
    begin
      int n5, n6;
      count_row(5, n5);
      count_row(6, n6);
      checks++;
      if (n5 != 0) begin failures++; $display("row 5 not cleared by reset"); end
      checks++;
      if (n6 == 0) begin failures++; $display("reset reached row 6"); end
    end
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

// tb_sc_param_optimizer_lr_sweep: the end-to-end test at the full stream length of 16384
// bits (128 tiles per bank) but 16 rows, run for the learning rates 0.01, 0.1 and 0.5. With
// eta = 0.01 a step changes a weight by at most 0.01, below the standard deviation of one
// stochastic estimate; the test checks the result against that spread and prints the RMS
// error of every update. The test itself is in sc_opt_tb_body.svh.
module tb_sc_param_optimizer_lr_sweep;
  import sc_pkg::*;
  localparam int N_TILES = 128, ROWS = 16, COLS = 128, TICKS_PER_TAU = 64;
  localparam int N = N_TILES * COLS;
  localparam int N_ETA = 3;
  localparam real ETA_LIST [N_ETA] = '{0.01, 0.1, 0.5};

  `include "sc_opt_tb_body.svh"

  initial begin
    run_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  sc_param_optimizer #(.N_TILES(N_TILES), .ROWS(ROWS), .COLS(COLS), .TICKS_PER_TAU(TICKS_PER_TAU)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .val_valid, .val_ready, .val_data,
    .eta_stream, .sel_stream, .up_shift, .res_valid, .res_row, .res_data, .res_sat, .busy, .bank
  );
endmodule

// tb_sc_param_optimizer: end-to-end test of the optimizer at a reduced size, 32 tiles per
// bank (a 4096-bit stream) and 16 rows; the test itself is in sc_opt_tb_body.svh.
module tb_sc_param_optimizer;
  import sc_pkg::*;
  localparam int N_TILES = 32, ROWS = 16, COLS = 128, TICKS_PER_TAU = 64;
  localparam int N = N_TILES * COLS;
  localparam int N_ETA = 1;
  localparam real ETA_LIST [N_ETA] = '{0.5};

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

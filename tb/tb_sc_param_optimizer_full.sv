// tb_sc_param_optimizer_full: the end-to-end test of sc_param_optimizer at its default size
// (128 tiles of 128 x 128 per bank, a 16384-bit stream, 128 rows): one load of 128 weights
// and four SGD updates of all of them, the last one driving weights into the clip. The
// test itself is in sc_opt_tb_body.svh.
module tb_sc_param_optimizer_full;
  import sc_pkg::*;
  localparam int N_TILES = 128, ROWS = 128, COLS = 128, TICKS_PER_TAU = 64;
  localparam int N = N_TILES * COLS;
  localparam int N_ETA = 1;
  localparam real ETA_LIST [N_ETA] = '{0.5};

  `include "sc_opt_tb_body.svh"

  initial begin
    run_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  sc_param_optimizer dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .val_valid, .val_ready, .val_data,
    .eta_stream, .sel_stream, .up_shift, .res_valid, .res_row, .res_data, .res_sat, .busy, .bank
  );
endmodule

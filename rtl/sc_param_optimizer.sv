// sc_param_optimizer: memristive stochastic-computing engine for the SGD weight update
// theta_n = theta_{n-1} - eta * grad, one parameter at a time.
//
// Each parameter owns one row in each of N_TILES crossbar tiles per bank, so its stream is
// N = N_TILES * COLS bits long (16384 with the defaults) and all of it is read out at once,
// one row per tile. A gradient is written into its rows of a gradient bank as an error
// pulse train; the weight sits in a weight bank as the stochastic switching left by an
// earlier weight pulse train. Reading the row of every tile through the sense amplifiers
// gives both streams in parallel. The gradient stream is multiplied by the stream of -eta
// (XNOR), added to the weight stream by a MUX whose select stream is the downscaling factor
// 1/2, counted by the decoder, multiplied by the upscaling factor and clipped; the result
// theta_n is written through the weight encoder into the other weight bank. There are four
// banks of N_TILES tiles (gradient and weight, each twice) so that consumed rows are reset
// while the other bank generates streams; with the defaults this is 512 tiles of 128 x 128.
//
// Interface: a command (CMD_LOAD or CMD_UPDATE) on cmd_valid/cmd_ready, then ROWS values on
// val_valid/val_ready: initial weights for a load, gradients (clipped to [-1, 1]) for an
// update. Each new weight appears on res_valid/res_row/res_data. eta_stream must carry the
// stream of -eta (one-probability (1 - eta)/2) and sel_stream the downscaling stream
// (one-probability 1/2), both N bits wide and freshly drawn by the surrounding system;
// they are sampled in the single cycle the controller is in its decode step. up_shift is
// the upscaling factor as a power of two (1 undoes the downscaling by 1/2). Timing per
// updated row: n_g + n_w + 8 cycles, where n_g and n_w are the pulse lengths the encoders
// choose for the gradient and the new weight.
//
// Following the architecture: the tile size and count, the crossbar read one row at a
// time, the two-step paired-column sensing, XNOR multiplication, MUX scaled addition,
// up-scaling and the doubled arrays. This design's own choices: the binary format, the
// encoder's table, where -eta and the select stream come from (outside), the sequential
// schedule and the interface.
module sc_param_optimizer
  import sc_pkg::*;
#(
  parameter int N_TILES       = 128,
  parameter int ROWS          = 128,
  parameter int COLS          = 128,
  parameter int TICKS_PER_TAU = 64,
  parameter int P_BITS        = 8,
  localparam int N            = N_TILES * COLS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cmd_valid,
  output logic         cmd_ready,
  input  cmd_t         cmd,
  input  logic         val_valid,
  output logic         val_ready,
  input  val_t         val_data,
  input  logic [N-1:0] eta_stream,
  input  logic [N-1:0] sel_stream,
  input  logic [1:0]   up_shift,
  output logic         res_valid,
  output row_t         res_row,
  output val_t         res_data,
  output logic         res_sat,
  output logic         busy,
  output logic         bank
);

  tile_ctrl_t g_ctrl [2];
  tile_ctrl_t w_ctrl [2];
  logic       sense, sense_phase;
  logic       genc_start, genc_prog, genc_done, genc_busy;
  logic       wenc_start, wenc_prog, wenc_done, wenc_busy;
  val_t       genc_value, wenc_value;
  pw_t        genc_width, wenc_width;
  logic       dec_in_valid, dec_out_valid;
  val_t       dec_out;

  update_controller #(.ROWS(ROWS)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .val_valid, .val_ready, .val_data,
    .genc_start, .genc_value, .genc_prog, .genc_done,
    .wenc_start, .wenc_value, .wenc_prog, .wenc_done,
    .g_ctrl, .w_ctrl, .bank,
    .sense, .sense_phase,
    .dec_in_valid, .dec_out_valid, .dec_out,
    .res_valid, .res_row, .res_data, .busy
  );

  // Error pulse train (gradients) and weight pulse train (new weights)
  pulse_encoder #(.P_BITS(P_BITS), .TICKS_PER_TAU(TICKS_PER_TAU)) u_genc (
    .clk, .rst_n, .start(genc_start), .value(genc_value),
    .prog(genc_prog), .busy(genc_busy), .done(genc_done), .width(genc_width)
  );
  pulse_encoder #(.P_BITS(P_BITS), .TICKS_PER_TAU(TICKS_PER_TAU)) u_wenc (
    .clk, .rst_n, .start(wenc_start), .value(wenc_value),
    .prog(wenc_prog), .busy(wenc_busy), .done(wenc_done), .width(wenc_width)
  );

  // Crossbar tiles with their sense amplifiers: [bank][tile]
  logic [N-1:0]       g_bits [2];
  logic [N-1:0]       w_bits [2];
  logic [N_TILES-1:0] g_read_ok [2];
  logic [N_TILES-1:0] w_read_ok [2];

  for (genvar k = 0; k < 2; k++) begin : g_bank
    logic sense_k;
    assign sense_k = sense && (bank == 1'(k));
    for (genvar t = 0; t < N_TILES; t++) begin : g_tile
      logic [COLS-1:0] g_on, w_on;

      rram_tile #(.ROWS(ROWS), .COLS(COLS), .TICKS_PER_TAU(TICKS_PER_TAU)) u_grad (
        .clk, .ctrl(g_ctrl[k]), .row_on(g_on)
      );
      rram_tile #(.ROWS(ROWS), .COLS(COLS), .TICKS_PER_TAU(TICKS_PER_TAU)) u_wgt (
        .clk, .ctrl(w_ctrl[k]), .row_on(w_on)
      );
      csa_array #(.COLS(COLS)) u_gsa (
        .clk, .rst_n, .sense(sense_k), .phase(sense_phase), .col_on(g_on),
        .q(g_bits[k][t*COLS +: COLS]), .valid(g_read_ok[k][t])
      );
      csa_array #(.COLS(COLS)) u_wsa (
        .clk, .rst_n, .sense(sense_k), .phase(sense_phase), .col_on(w_on),
        .q(w_bits[k][t*COLS +: COLS]), .valid(w_read_ok[k][t])
      );
    end
  end

  // Stochastic arithmetic on the bank being read
  logic [N-1:0] grad_stream, wgt_stream, prod_stream, sum_stream;

  assign grad_stream = g_bits[bank];
  assign wgt_stream  = w_bits[bank];

  xnor_multiplier #(.N(N)) u_mul (.a(grad_stream), .b(eta_stream), .y(prod_stream));

  mux_scaled_adder #(.N(N)) u_add (
    .a(prod_stream), .b(wgt_stream), .sel(sel_stream), .y(sum_stream)
  );

  sc_decoder #(.LANES(N_TILES), .LANE_W(COLS)) u_dec (
    .clk, .rst_n, .in_valid(dec_in_valid), .bits(sum_stream), .up_shift,
    .out_valid(dec_out_valid), .out(dec_out), .sat(res_sat)
  );

  // Checks: only one pulse train at a time, and the decoder only ever sees rows that every
  // sense amplifier of the bank being read has completed in both steps.
  a_one_encoder_busy: assert property (@(posedge clk) disable iff (!rst_n)
    !(genc_busy && wenc_busy));
  a_complete_read: assert property (@(posedge clk) disable iff (!rst_n)
    dec_in_valid |-> (&g_read_ok[bank] && &w_read_ok[bank]));
  a_width_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (!genc_prog || genc_width != '0) && (!wenc_prog || wenc_width != '0));

endmodule

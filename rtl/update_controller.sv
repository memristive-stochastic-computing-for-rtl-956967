// update_controller: sequences the parameter-update datapath one crossbar row at a time.
//
// Row r of every tile of a bank holds one parameter: the gradient banks hold grad_r, the
// weight banks theta_r. There are two gradient banks and two weight banks (index 0/1); in
// each update the banks selected by `bank` are read while the other weight bank receives
// the new weights, and the rows just consumed are reset, so that half of the tiles are being
// reset while the other half generate bit streams. `bank` flips when an update has covered
// all ROWS rows, and the next update reads what the last one wrote.
//
// CMD_LOAD, per row r (ROWS rows): accept theta_0 on val_*, reset weight row r of the
// current bank and program it through the weight encoder.
// CMD_UPDATE, per row r:
//   S_GVAL   accept grad_r on val_*, start the gradient encoder
//   S_GPROG  apply the error pulse train to gradient row r (n_g ticks), until done
//   S_RD0/1  open gradient and weight row r, sense even then odd columns
//   S_DEC    the complete streams go through XNOR and MUX into the decoder
//   S_DWAIT  wait for theta_n; then report it, start the weight encoder with it and reset
//            gradient and weight row r of the bank just read
//   S_WPROG  apply the weight pulse train to row r of the other weight bank (n_w ticks)
// A row takes n_g + n_w + 8 cycles when val_valid is already high.
//
// The row-at-a-time flow, the doubled arrays and the reset of one half while the other
// half generates follow the architecture. The command/valid-ready interface, the state
// encoding and the strictly sequential order of the steps are this design's choices.
module update_controller
  import sc_pkg::*;
#(
  parameter int ROWS = 128
) (
  input  logic       clk,
  input  logic       rst_n,
  // command
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  cmd_t       cmd,
  // per-row value: theta_0 (load) or grad (update)
  input  logic       val_valid,
  output logic       val_ready,
  input  val_t       val_data,
  // gradient encoder
  output logic       genc_start,
  output val_t       genc_value,
  input  logic       genc_prog,
  input  logic       genc_done,
  // weight encoder
  output logic       wenc_start,
  output val_t       wenc_value,
  input  logic       wenc_prog,
  input  logic       wenc_done,
  // tiles
  output tile_ctrl_t g_ctrl [2],
  output tile_ctrl_t w_ctrl [2],
  output logic       bank,
  // sense amplifiers
  output logic       sense,
  output logic       sense_phase,
  // decoder
  output logic       dec_in_valid,
  input  logic       dec_out_valid,
  input  val_t       dec_out,
  // result
  output logic       res_valid,
  output row_t       res_row,
  output val_t       res_data,
  output logic       busy
);

  initial assert (ROWS <= (1 << ROW_IDX_W)) else $error("update_controller: too many rows");

  typedef enum logic [3:0] {
    S_IDLE, S_LVAL, S_LPROG, S_GVAL, S_GPROG, S_RD0, S_RD1, S_DEC, S_DWAIT, S_WPROG
  } state_t;

  state_t state;
  row_t   row;
  logic   last_row;

  assign last_row = (int'(row) == ROWS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      row   <= '0;
      bank  <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          row   <= '0;
          state <= (cmd == CMD_LOAD) ? S_LVAL : S_GVAL;
        end
        S_LVAL:  if (val_valid) state <= S_LPROG;
        S_LPROG: if (wenc_done) begin
          row   <= row + 1'b1;
          state <= last_row ? S_IDLE : S_LVAL;
        end
        S_GVAL:  if (val_valid) state <= S_GPROG;
        S_GPROG: if (genc_done) state <= S_RD0;
        S_RD0:   state <= S_RD1;
        S_RD1:   state <= S_DEC;
        S_DEC:   state <= S_DWAIT;
        S_DWAIT: if (dec_out_valid) state <= S_WPROG;
        S_WPROG: if (wenc_done) begin
          row <= row + 1'b1;
          if (last_row) begin
            bank  <= ~bank;
            state <= S_IDLE;
          end else begin
            state <= S_GVAL;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    cmd_ready    = (state == S_IDLE);
    busy         = (state != S_IDLE);
    val_ready    = (state == S_LVAL) || (state == S_GVAL);
    genc_start   = (state == S_GVAL) && val_valid;
    genc_value   = val_data;
    wenc_start   = ((state == S_LVAL) && val_valid) || ((state == S_DWAIT) && dec_out_valid);
    wenc_value   = (state == S_LVAL) ? val_data : dec_out;
    sense        = (state == S_RD0) || (state == S_RD1);
    sense_phase  = (state == S_RD1);
    dec_in_valid = (state == S_DEC);
    res_valid    = (state == S_DWAIT) && dec_out_valid;
    res_row      = row;
    res_data     = dec_out;

    for (int k = 0; k < 2; k++) begin
      g_ctrl[k] = '{row: row, prog: 1'b0, rst: 1'b0};
      w_ctrl[k] = '{row: row, prog: 1'b0, rst: 1'b0};
    end

    unique case (state)
      // reset the row about to be loaded, then program it
      S_LVAL:  w_ctrl[bank].rst  = val_valid;
      S_LPROG: w_ctrl[bank].prog = wenc_prog;
      S_GPROG: g_ctrl[bank].prog = genc_prog;
      // consumed rows are reset while the new weight is being started
      S_DWAIT: begin
        g_ctrl[bank].rst = dec_out_valid;
        w_ctrl[bank].rst = dec_out_valid;
      end
      S_WPROG: w_ctrl[~bank].prog = wenc_prog;
      default: ;
    endcase
  end

  // Handshake rules
  a_one_pulse_source: assert property (@(posedge clk) disable iff (!rst_n)
    !(genc_prog && wenc_prog));
  a_no_prog_during_read: assert property (@(posedge clk) disable iff (!rst_n)
    sense |-> !(genc_prog || wenc_prog));

endmodule

// sc_pkg: types and constants shared by the stochastic parameter-update datapath.
//
// Binary values (weights, gradients, learning rate) are bipolar numbers in [-1, 1],
// carried as signed fixed point with VAL_FRAC fractional bits, so +1.0 is 2**VAL_FRAC.
// A bipolar value v is represented in the stochastic domain by a bit stream whose
// probability of a one is p = (v + 1) / 2. The 16-bit width and the Q1.14 format are
// choices of this design; the number format of the binary side is not fixed by the
// architecture itself.
package sc_pkg;

  localparam int VAL_W    = 16;
  localparam int VAL_FRAC = 14;
  localparam int VAL_ONE  = 1 << VAL_FRAC;

  typedef logic signed [VAL_W-1:0] val_t;

  // Width of a programming-pulse length, in clock ticks.
  localparam int PW_W = 10;
  typedef logic [PW_W-1:0] pw_t;

  // Row index carried to a crossbar tile (tiles of up to 256 rows).
  localparam int ROW_IDX_W = 8;
  typedef logic [ROW_IDX_W-1:0] row_t;

  // Control of one bank of crossbar tiles: the word line to open, a programming
  // pulse applied to that row, and a reset of that row (all cells back to off).
  typedef struct packed {
    row_t row;
    logic prog;
    logic rst;
  } tile_ctrl_t;

  // Operations of the parameter optimizer.
  typedef enum logic [0:0] {
    CMD_LOAD   = 1'b0,  // write initial weights theta_0, one per row
    CMD_UPDATE = 1'b1   // one SGD step: theta_n = theta_{n-1} - eta * grad, one row at a time
  } cmd_t;

endpackage

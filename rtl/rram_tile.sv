// rram_tile: behavioural model (not synthesizable logic) of one crossbar tile of
// probabilistic CBRAM cells, ROWS x COLS, used to generate stochastic bit streams in memory.
//
// A word line opens one row at a time (ctrl.row). While ctrl.prog is high a programming
// pulse is applied to that row; each cell that is still off switches on during one clock
// tick with probability q = 1 - exp(-1/TICKS_PER_TAU). Switching is memoryless, so after a
// pulse of n ticks a cell is on with probability 1 - exp(-n/TICKS_PER_TAU): this is the
// switching law P(t,V) = 1 - exp(-t*e^(V/V0)/tau0) of the device at a fixed voltage, with one
// tick equal to tau0*e^(-V/V0)/TICKS_PER_TAU. Cells switch independently of each other.
// ctrl.rst returns every cell of the opened row to off in one cycle (it wins over prog).
// row_on shows, without delay, which cells of the opened row conduct; the sense amplifiers
// turn that into bits. All cells start off, as the devices are initialised off.
//
// Following the architecture: one row open at a time, stochastic switching by programming
// pulses of variable width, parallel read-out of the row, row-by-row reset. This model's
// own choices: the tick length (TICKS_PER_TAU), a one-cycle reset and the use of the
// simulator's random generator for the device noise.
module rram_tile
  import sc_pkg::*;
#(
  parameter int ROWS          = 128,
  parameter int COLS          = 128,
  parameter int TICKS_PER_TAU = 64
) (
  input  logic             clk,
  input  tile_ctrl_t       ctrl,
  output logic [COLS-1:0]  row_on
);

  // Per-tick switching probability as a 32-bit threshold for $urandom.
  localparam real         Q_TICK   = 1.0 - $exp(-1.0 / real'(TICKS_PER_TAU));
  localparam longint      Q_THRESH = longint'(Q_TICK * 4294967296.0);

  localparam int RW = (ROWS > 1) ? $clog2(ROWS) : 1;

  logic [COLS-1:0] cells [ROWS];
  logic [RW-1:0]   r;
  logic            in_range;

  assign r        = RW'(ctrl.row);
  assign in_range = (int'(ctrl.row) < ROWS);

  initial begin
    for (int i = 0; i < ROWS; i++) cells[i] = '0;
  end

  always @(posedge clk) begin
    if (in_range) begin
      if (ctrl.rst) begin
        cells[r] <= '0;
      end else if (ctrl.prog) begin
        for (int c = 0; c < COLS; c++) begin
          if (!cells[r][c] && (longint'($urandom) < Q_THRESH))
            cells[r][c] <= 1'b1;
        end
      end
    end
  end

  assign row_on = in_range ? cells[r] : '0;

endmodule

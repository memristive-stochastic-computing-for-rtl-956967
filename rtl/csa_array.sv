// csa_array: the current sense amplifiers under one crossbar tile and the register they
// read into.
//
// A row of the tile is read out in parallel, one bit per column, where a 1 means the cell
// draws current (it has switched on). Amplifiers are shared between pairs of columns: the
// reference that tells an on cell from an off cell is taken from the neighbouring column,
// so a row is read in two time-multiplexed steps. With sense high, phase 0 latches the
// even columns and phase 1 the odd columns; the other half of the register keeps its value.
// valid rises the cycle after a phase-1 read and falls after a phase-0 read, so it marks a
// register that holds a complete row read in the order phase 0, phase 1.
//
// The comparison itself is analog; here the cell's conduction arrives as a bit (col_on) and
// the amplifier is the latch that samples it. Pairwise sharing and the two-step read follow
// the architecture; the even/odd order and the valid flag are this design's choices.
module csa_array #(
  parameter int COLS = 128
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sense,
  input  logic            phase,
  input  logic [COLS-1:0] col_on,
  output logic [COLS-1:0] q,
  output logic            valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q     <= '0;
      valid <= 1'b0;
    end else if (sense) begin
      for (int c = 0; c < COLS; c++) begin
        if ((c % 2) == int'(phase)) q[c] <= col_on[c];
      end
      valid <= phase;
    end
  end

endmodule

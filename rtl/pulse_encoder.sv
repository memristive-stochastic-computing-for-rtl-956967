// pulse_encoder: turns a bipolar binary value into a programming pulse train for a crossbar
// row, so that each cell of the row ends up on with the probability that codes the value.
//
// The value v (Q1.14, clipped to [-1, 1]) is mapped to the one-probability p = (v + 1)/2 and
// rounded to P_BITS bits, i = round(p * 2**P_BITS). Inverting the device switching law
// p = 1 - exp(-n/TICKS_PER_TAU) gives the pulse length n = -TICKS_PER_TAU * ln(1 - i/2**P_BITS)
// ticks. These lengths are a table computed when the design is elaborated; i = 2**P_BITS
// (p = 1, an infinitely long pulse) uses the last entry.
//
// Timing: start is accepted when busy is low. In the cycle after start, prog goes high and
// stays high for exactly n cycles; the cycle after the last pulse tick done is high for one
// cycle and busy falls. With n = 0 done follows start directly. width shows n while busy.
//
// The architecture programs a row with a pulse train of variable width at a fixed voltage
// and uses a ready-made encoder; the table, its resolution (P_BITS) and the tick length
// are this design's choices.
module pulse_encoder
  import sc_pkg::*;
#(
  parameter int P_BITS        = 8,
  parameter int TICKS_PER_TAU = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  val_t value,
  output logic prog,
  output logic busy,
  output logic done,
  output pw_t  width
);

  localparam int LUT_N = 1 << P_BITS;
  localparam int PW_MAX = (1 << PW_W) - 1;

  typedef pw_t lut_t [LUT_N];

  function automatic lut_t make_lut();
    lut_t t;
    for (int i = 0; i < LUT_N; i++) begin
      real n;
      n = -real'(TICKS_PER_TAU) * $ln(1.0 - real'(i) / real'(LUT_N));
      t[i] = (n + 0.5 >= real'(PW_MAX)) ? pw_t'(PW_MAX) : pw_t'(int'($floor(n + 0.5)));
    end
    return t;
  endfunction

  localparam lut_t LUT = make_lut();

  // Probability index of the value, rounded and clipped to the table.
  localparam int SHIFT = VAL_FRAC + 1 - P_BITS;
  localparam logic signed [VAL_W+1:0] ONE_X = (VAL_W+2)'(VAL_ONE);
  localparam logic signed [VAL_W+1:0] LUT_X = (VAL_W+2)'(LUT_N);
  logic signed [VAL_W+1:0] v_clip, p_scaled;
  logic [P_BITS-1:0]       idx;

  always_comb begin
    v_clip = (VAL_W+2)'(value);
    if (v_clip >  ONE_X) v_clip =  ONE_X;
    if (v_clip < -ONE_X) v_clip = -ONE_X;
    // p * 2**(VAL_FRAC+1) = v + 2**VAL_FRAC, then round to P_BITS bits
    p_scaled = (v_clip + ONE_X + (VAL_W+2)'(1 << (SHIFT - 1))) >>> SHIFT;
    idx      = (p_scaled >= LUT_X) ? P_BITS'(LUT_N - 1) : P_BITS'(p_scaled);
  end

  pw_t cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      width <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          width <= LUT[idx];
          cnt   <= LUT[idx];
          if (LUT[idx] == '0) done <= 1'b1;
          else                busy <= 1'b1;
        end
      end else begin
        cnt <= cnt - 1'b1;
        if (cnt == pw_t'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign prog = busy;

endmodule

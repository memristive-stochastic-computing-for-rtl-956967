// sc_decoder: converts the parallel bipolar bit stream of one parameter back to binary and
// applies the upscaling factor, giving the updated weight theta_n.
//
// The stream arrives all at once as LANES groups of LANE_W bits (one group per crossbar
// tile). Stage 1 counts the ones of each group; stage 2 adds the group counts to c, forms
// the bipolar value (2c - N)/N with N = LANES*LANE_W (a power of two), multiplies it by the
// upscaling factor 2**up_shift and clips it to [-1, 1]. The value is truncated towards minus
// infinity to Q1.14. out and out_valid appear two cycles after in_valid (latency 2, one
// stream per cycle); out holds its value until the next result.
//
// A popcount per group followed by an adder tree does in one step what the bipolar
// up/down counter of a serial stream does over N cycles. The upscaling by a power of two,
// the clip and the number format are this design's choices.
module sc_decoder
  import sc_pkg::*;
#(
  parameter int LANES  = 128,
  parameter int LANE_W = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [LANES*LANE_W-1:0] bits,
  input  logic [1:0]              up_shift,
  output logic                    out_valid,
  output val_t                    out,
  output logic                    sat
);

  localparam int N    = LANES * LANE_W;
  localparam int LOGN = $clog2(N);
  localparam int GW   = $clog2(LANE_W + 1);
  localparam int CW   = $clog2(N + 1);
  localparam int WW   = CW + VAL_FRAC + 8;

  initial assert (N == (1 << LOGN)) else $error("sc_decoder: stream length must be a power of two");

  logic [GW-1:0] gcnt [LANES];
  logic          v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      for (int l = 0; l < LANES; l++) gcnt[l] <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++)
          gcnt[l] <= GW'($countones(bits[l*LANE_W +: LANE_W]));
      end
    end
  end

  logic [CW-1:0]        total;
  logic signed [WW-1:0] bip, scaled, up;
  val_t                 clipped;
  logic                 clip_hit;

  always_comb begin
    total = '0;
    for (int l = 0; l < LANES; l++) total += CW'(gcnt[l]);
    bip = WW'(2 * total) - WW'(N);
    // (2c - N)/N in Q1.VAL_FRAC
    if (LOGN >= VAL_FRAC) scaled = bip >>> (LOGN - VAL_FRAC);
    else                  scaled = bip <<< (VAL_FRAC - LOGN);
    up = scaled <<< up_shift;
    clip_hit = 1'b0;
    if (up > WW'(VAL_ONE)) begin
      clipped  = val_t'(VAL_ONE);
      clip_hit = 1'b1;
    end else if (up < -WW'(VAL_ONE)) begin
      clipped  = -val_t'(VAL_ONE);
      clip_hit = 1'b1;
    end else begin
      clipped = val_t'(up);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
      sat       <= 1'b0;
    end else begin
      out_valid <= v1;
      if (v1) begin
        out <= clipped;
        sat <= clip_hit;
      end
    end
  end

endmodule

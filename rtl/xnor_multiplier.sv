// xnor_multiplier: bipolar stochastic multiplier, one XNOR gate per bit lane.
//
// For two independent bipolar streams a (value 2*Pa-1) and b (value 2*Pb-1), the stream
// ~(a ^ b) has value (2*Pa-1)*(2*Pb-1), the product. Here a is the gradient stream read from
// the gradient tiles and b the stream of the negative learning rate, so y carries -eta*grad.
// All N lanes are computed at once; the block is purely combinational. The XNOR as the
// multiplier, applied to the negative learning rate, follows the architecture; one shared
// array behind the bank multiplexer (rather than one under each gradient tile) is this
// design's choice.
module xnor_multiplier #(
  parameter int N = 16384
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] y
);

  always_comb y = ~(a ^ b);

endmodule

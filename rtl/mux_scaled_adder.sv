// mux_scaled_adder: stochastic scaled adder, one 2:1 multiplexer per bit lane.
//
// With a select stream of one-probability s, the output takes lane a with probability s and
// lane b otherwise, so its value is s*A + (1-s)*B in both unipolar and bipolar coding. With
// s = 1/2 (the downscaling factor) it is (A + B)/2. In the update datapath a carries
// -eta*grad from the XNOR multiplier and b the previous weight theta_{n-1}; the decoder
// multiplies the result back by the upscaling factor. sel = 1 picks a: this polarity is a
// choice of this design. Purely combinational.
module mux_scaled_adder #(
  parameter int N = 16384
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic [N-1:0] sel,
  output logic [N-1:0] y
);

  always_comb y = (sel & a) | (~sel & b);

endmodule

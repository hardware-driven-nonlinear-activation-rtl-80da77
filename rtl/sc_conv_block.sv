// sc_conv_block: one convolution block of the neuron, the stochastic inner
// product of N input/weight stream pairs.
//
// The N product bits come from XNOR multipliers (sc_xnor_mult) and are
// summed by the parallel counter (sc_apc), so the output is a binary
// number each cycle: the count of ones among the N products. The bipolar
// value of that cycle's inner-product sample is 2*cnt - N.
//
// Interface: x, w (N bits each) in, cnt ($clog2(N+1) bits) out.
// Combinational; the neuron registers nothing between the convolution
// blocks and the activation counter.
module sc_conv_block #(
  parameter int unsigned N  = 25,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic [N-1:0]  x,
  input  logic [N-1:0]  w,
  output logic [CW-1:0] cnt
);

  logic [N-1:0] p;

  sc_xnor_mult #(.N(N)) u_mult (.x(x), .w(w), .p(p));
  sc_apc       #(.N(N)) u_apc  (.p(p), .cnt(cnt));

endmodule

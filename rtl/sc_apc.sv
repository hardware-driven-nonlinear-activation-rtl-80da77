// sc_apc: parallel counter that turns N stochastic product bits into a
// binary count of their ones.
//
// The neuron uses a parallel counter instead of a multiplexer tree for the
// stochastic addition: a multiplexer keeps only one of its inputs per
// cycle, whereas the counter uses every bit. The approximate parallel
// counter of the literature trims low-order logic of an exact counter; its
// internal structure is not reproduced here, so this block is an exact
// counter (an adder tree written as a loop). The count is what the
// neuron's algorithm uses: t = 2*cnt - N is the bipolar sum of the N
// products in this cycle.
//
// Interface: p[N-1:0] in, cnt out with $clog2(N+1) bits (0..N).
// Combinational.
module sc_apc #(
  parameter int unsigned N  = 25,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic [N-1:0]  p,
  output logic [CW-1:0] cnt
);

  always_comb begin
    cnt = '0;
    for (int unsigned i = 0; i < N; i++) cnt = cnt + CW'(p[i]);
  end

endmodule

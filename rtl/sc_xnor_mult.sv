// sc_xnor_mult: bipolar stochastic multipliers for one convolution block.
//
// Each lane multiplies one input bit x[i] by one weight bit w[i] with an
// XNOR gate. For independent bipolar streams the product stream encodes
// the product of the two values: P(p=1) = P(x)P(w) + (1-P(x))(1-P(w)),
// so 2P(p=1)-1 = (2P(x)-1)(2P(w)-1).
//
// Interface: N lanes in, N product bits out. Purely combinational; one
// stream bit per lane per clock cycle of the surrounding logic.
module sc_xnor_mult #(
  parameter int unsigned N = 25
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] w,
  output logic [N-1:0] p
);

  always_comb p = ~(x ^ w);

endmodule

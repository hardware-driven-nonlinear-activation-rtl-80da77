// sc_history: history shift register array and shadow counter used by the
// logistic and ReLU activations to guess the sign of the neuron's output.
//
// H[0:ALPHA-1] holds the last ALPHA output bits of the neuron, H[0] the
// newest. The shadow counter delta equals the number of ones in H. When
// delta < ALPHA/2 the recent output stream has fewer ones than zeros, i.e.
// it encodes a negative bipolar value, which neither logistic nor ReLU can
// produce; the activation then emits a 1 as compensation (see
// sc_logrelu_act). A count of exactly ALPHA/2 encodes zero and is taken as
// not negative.
//
// The shadow counter is kept as an up/down counter, delta += z_in -
// H[ALPHA-1], which always equals the sum of the array; the design
// description defines it as that sum.
//
// Interface and timing:
//   init  synchronous: H <= 0, delta <= 0 (so the first ALPHA/2 outputs of
//         a stream are compensation ones).
//   en    shift z_in into H[0]; H[r] <= H[r-1].
//   neg   combinational: delta < ALPHA/2, for the current cycle.
// init has priority over en; asynchronous active-low reset clears both.
module sc_history #(
  parameter int unsigned ALPHA = 16,
  localparam int unsigned DW = $clog2(ALPHA + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic          en,
  input  logic          z_in,
  output logic [DW-1:0] delta,
  output logic          neg
);

  logic [ALPHA-1:0] h;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h     <= '0;
      delta <= '0;
    end else if (init) begin
      h     <= '0;
      delta <= '0;
    end else if (en) begin
      h     <= {h[ALPHA-2:0], z_in};
      delta <= delta + DW'(z_in) - DW'(h[ALPHA-1]);
    end
  end

  assign neg = (delta < DW'(ALPHA / 2));

  if (ALPHA < 2) begin : g_bad_alpha
    $error("sc_history: ALPHA must be at least 2");
  end

endmodule

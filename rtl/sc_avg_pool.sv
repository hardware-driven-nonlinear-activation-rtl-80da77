// sc_avg_pool: Q-to-1 average pooling of binary convolution counts.
//
// The counts leaving the parallel counters are binary, so a stochastic
// multiplexer cannot be used for pooling. Instead the Q counts are added
// in binary and the low log2(Q) bits of the sum are dropped, which divides
// by Q: for 2x2 pooling avg is bits [2 : log2(n)+1] of the sum, the floor
// of the mean count, with the width of one count.
//
// The dropped bits are also brought out as frac. The neuron's activation
// counter adds them back as fraction bits of its state (see
// sc_sat_counter, parameter POOL_FRAC), because flooring alone biases the
// mean count down by about (Q-1)/(2Q) every cycle; a consumer that wants
// the plain truncated average ignores frac.
//
// Interface: cnt[Q] counts of CW bits in; avg (CW bits) and frac
// (log2(Q) bits) out. Q must be a power of two, at least 2.
// Combinational.
module sc_avg_pool #(
  parameter int unsigned N  = 25,
  parameter int unsigned Q  = 4,
  localparam int unsigned CW = $clog2(N + 1),
  localparam int unsigned QW = $clog2(Q),
  localparam int unsigned SW = CW + QW
) (
  input  logic [CW-1:0] cnt [Q],
  output logic [CW-1:0] avg,
  output logic [QW-1:0] frac
);

  logic [SW-1:0] sum;

  always_comb begin
    sum = '0;
    for (int unsigned j = 0; j < Q; j++) sum = sum + SW'(cnt[j]);
  end

  assign avg  = sum[SW-1:QW];
  assign frac = sum[QW-1:0];

  if ((1 << QW) != Q || Q < 2) begin : g_bad_q
    $error("sc_avg_pool: Q must be a power of two, at least 2");
  end

endmodule

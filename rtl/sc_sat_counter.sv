// sc_sat_counter: saturated up/down counter that turns the pooled binary
// count into one output stream bit per cycle. With the boundary state set
// to E/2 it is the hyperbolic-tangent activation of the neuron; the
// logistic/ReLU activation (sc_logrelu_act) reuses it with other
// boundaries.
//
// State S runs over 0..E-1 and starts each stream at the boundary state.
// Each enabled cycle it moves by the pooled bipolar inner-product sample
//     t = (sum over the Q blocks of (2*cnt_j - N)) / Q  =  2*pooled - N,
// where pooled = (sum of the Q counts) / Q, is clamped into range, and the
// output bit is 1 when the new state is at or above the boundary state:
// with boundary E/2 the upper half of the states outputs 1 (tanh, ReLU),
// with E/4 the upper three quarters do (logistic). The state drifts up
// for positive inner products and down for negative ones; the fraction of
// cycles spent at or above the boundary follows a tanh-shaped curve.
//
// Pooling precision (parameter POOL_FRAC):
//   1 (default)  the counter keeps the log2(Q) low bits of the pooled sum
//                as fraction bits of S, so the step is exactly t above.
//                The state register holds S in units of 1/Q
//                (log2(E)+log2(Q) bits), the step is 2*sum - Q*N, the
//                integer part saturates at E-1 and the fraction bits at
//                all ones, and the boundary is compared on the integer
//                part.
//   0            the step is 2*avg - N with avg the floored mean count,
//                i.e. the pooling adder's low bits are simply dropped and
//                S saturates at E-1. For odd N and Q = 4 this shifts the
//                mean step by about -0.75 per cycle, which pulls the output
//                strongly negative (about -0.5 for a zero input at N = 25,
//                E = 8).
// The neuron's pooling adder drops the low bits, while its algorithm adds
// the exact mean; the exact form is the default because the truncated one
// cannot produce a usable tanh curve.
//
// Output rule: the algorithm listing writes "S > S_bound"; the prose
// ("half of the states output 1", "1/4 of the states output 0") and the
// classic tanh state machine, whose output-1 half starts at state K/2,
// give "S >= S_bound". The latter is used: it splits the states evenly and
// in a model sweep halved the tanh error. E (number of states) is chosen
// per input size by a search for best accuracy; 8 is what such a search
// gives here for N = 25, Q = 4 (this design's own choice, a parameter).
//
// Interface and timing:
//   init   synchronous: S <= bound (the starting state of every stream).
//   en     consume one pooled count: S <= clamp(S + t).
//   avg, frac  pooled count from sc_avg_pool (integer and dropped bits).
//   state  integer part of the registered state.
//   s_next integer part of the clamped next state, combinational.
//   z_next combinational output bit for this cycle: next S >= bound.
// init has priority over en. Asynchronous active-low reset to state 0;
// every stream must begin with init.
module sc_sat_counter #(
  parameter int unsigned N         = 25,
  parameter int unsigned Q         = 4,
  parameter int unsigned E         = 8,
  parameter bit          POOL_FRAC = 1'b1,
  localparam int unsigned CW  = $clog2(N + 1),
  localparam int unsigned QW  = $clog2(Q),
  localparam int unsigned SW  = $clog2(E),
  localparam int unsigned FB  = POOL_FRAC ? QW : 0,
  localparam int unsigned FSW = SW + FB,
  localparam int unsigned AW  = ((FSW > CW + QW) ? FSW : CW + QW) + 3
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic          en,
  input  logic [SW-1:0] bound,
  input  logic [CW-1:0] avg,
  input  logic [QW-1:0] frac,
  output logic [SW-1:0] state,
  output logic [SW-1:0] s_next,
  output logic          z_next
);

  localparam logic signed [AW-1:0] SMAX = AW'((E << FB) - 1);

  logic [FSW-1:0]       state_f;
  logic [FSW-1:0]       next_f;
  logic [FSW-1:0]       bound_f;
  logic signed [AW-1:0] step;
  logic signed [AW-1:0] acc;

  always_comb begin
    bound_f = FSW'(bound) << FB;
    if (POOL_FRAC) step = $signed(AW'({avg, frac, 1'b0})) - $signed(AW'(Q * N));
    else           step = $signed(AW'({avg, 1'b0}))       - $signed(AW'(N));
    acc = $signed(AW'(state_f)) + step;
    if (acc < 0)         next_f = '0;
    else if (acc > SMAX) next_f = SMAX[FSW-1:0];
    else                 next_f = acc[FSW-1:0];
    z_next = (next_f >= bound_f);
    s_next = SW'(next_f >> FB);
    state  = SW'(state_f >> FB);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state_f <= '0;
    else if (init) state_f <= bound_f;
    else if (en)   state_f <= next_f;
  end

endmodule

// sc_logrelu_act: combined logistic / ReLU activation of the stochastic
// neuron, selected by the configuration bit beta (1: logistic, 0: ReLU).
//
// Both activations must produce non-negative values only. A history array
// of the last ALPHA output bits (sc_history) predicts the sign of the
// current output; while it predicts a negative value the activation
// outputs a 1 as compensation and leaves the saturated counter untouched
// for that cycle (the published algorithm places the counter update in the
// branch taken only without compensation; that is followed literally).
// Otherwise the pooled count is applied to the saturated counter
// (sc_sat_counter) and its output bit is used.
//
// The two functions differ only in the boundary state of the counter.
// ReLU is centred on (0,0), so the boundary stays at E/2 as for tanh. The
// logistic curve has its midpoint at 0.5, which in bipolar coding is a
// stream of 3/4 ones, so the boundary moves down to E/4 and three quarters
// of the states output 1.
//
// Interface and timing:
//   init   synchronous start of a stream: counter state <= boundary, history
//          and shadow counter <= 0. beta is sampled here; it selects the
//          boundary, which must not change during a stream.
//   en     consume one pooled count (avg, frac from sc_avg_pool) and
//          produce output bit z.
//   z      combinational output bit of the current cycle.
//   comp   combinational: this cycle's bit is a compensation 1.
// z is shifted into the history on the same clock edge that consumes avg.
module sc_logrelu_act #(
  parameter int unsigned N         = 25,
  parameter int unsigned Q         = 4,
  parameter int unsigned E         = 8,
  parameter int unsigned ALPHA     = 16,
  parameter bit          POOL_FRAC = 1'b1,
  localparam int unsigned CW = $clog2(N + 1),
  localparam int unsigned QW = $clog2(Q),
  localparam int unsigned SW = $clog2(E)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic          en,
  input  logic          beta,
  input  logic [CW-1:0] avg,
  input  logic [QW-1:0] frac,
  output logic          z,
  output logic          comp
);

  localparam logic [SW-1:0] BOUND_LOGISTIC = SW'(E / 4);
  localparam logic [SW-1:0] BOUND_RELU     = SW'(E / 2);

  logic          beta_q;
  logic [SW-1:0] bound;
  logic          cnt_z;
  logic          neg;

  // The boundary is held for the whole stream; at init the new beta is
  // used directly so the counter starts at the right boundary.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    beta_q <= 1'b0;
    else if (init) beta_q <= beta;
  end

  always_comb begin
    if (init ? beta : beta_q) bound = BOUND_LOGISTIC;
    else                      bound = BOUND_RELU;
  end

  sc_sat_counter #(.N(N), .Q(Q), .E(E), .POOL_FRAC(POOL_FRAC)) u_cnt (
    .clk   (clk),
    .rst_n (rst_n),
    .init  (init),
    .en    (en && !neg),
    .bound (bound),
    .avg   (avg),
    .frac  (frac),
    .state (),
    .s_next(),
    .z_next(cnt_z)
  );

  sc_history #(.ALPHA(ALPHA)) u_hist (
    .clk   (clk),
    .rst_n (rst_n),
    .init  (init),
    .en    (en),
    .z_in  (z),
    .delta (),
    .neg   (neg)
  );

  assign comp = neg;
  assign z    = neg ? 1'b1 : cnt_z;

  if ((E % 4) != 0) begin : g_bad_e
    $error("sc_logrelu_act: E must be a multiple of 4");
  end

endmodule

// sc_pkg: types and defaults shared by the stochastic-computing neuron.
//
// The neuron works on bipolar stochastic bit streams: a value v in [-1,1]
// is carried by a stream whose bits are 1 with probability (v+1)/2. One
// stream bit per lane is consumed each clock cycle.
//
// act_e selects the activation function of a neuron cell. The three
// functions (hyperbolic tangent, logistic, rectified linear) are the ones
// the neuron design provides; their encoding here is this design's choice.
package sc_pkg;

  typedef enum logic [1:0] {
    ACT_TANH     = 2'd0,
    ACT_LOGISTIC = 2'd1,
    ACT_RELU     = 2'd2
  } act_e;

  // Reference configuration: 5x5 receptive field, 4-to-1 average pooling,
  // bit streams of 1024 bits.
  localparam int unsigned DEF_N     = 25;
  localparam int unsigned DEF_Q     = 4;
  localparam int unsigned DEF_M     = 1024;
  // Number of saturated-counter states and history length: not fixed by the
  // design description, chosen here (see sc_sat_counter and sc_history).
  // E = 8 was the best or near-best number of states for all three
  // activations in model sweeps of E = 4..16 at N = 25, Q = 4, m = 1024.
  localparam int unsigned DEF_E     = 8;
  localparam int unsigned DEF_ALPHA = 16;
  // Keep the pooling adder's dropped bits as counter fraction bits.
  localparam bit          DEF_POOL_FRAC = 1'b1;

endpackage

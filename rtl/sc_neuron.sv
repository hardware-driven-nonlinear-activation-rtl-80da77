// sc_neuron: stochastic-computing neuron cell with selectable tanh,
// logistic or ReLU activation (convolution, average pooling, activation).
//
// Data path, one stream bit per lane per clock cycle:
//   Q convolution blocks  each multiplies N input bits by N weight bits
//                         with XNOR gates and counts the ones (sc_conv_block)
//   average pooling       adds the Q counts and drops log2(Q) low bits
//                         (sc_avg_pool)
//   activation            tanh: saturated counter with boundary E/2
//                         (sc_sat_counter); logistic / ReLU: saturated
//                         counter with boundary E/4 / E/2 plus the history
//                         array that forces 1s while the recent output looks
//                         negative (sc_logrelu_act)
// The output is again a bipolar stochastic stream, one bit per accepted
// input cycle, ready to feed the next layer's neurons.
//
// Control (this design's own choice; the neuron algorithm only loops over
// the m bits of a stream):
//   start   one-cycle pulse that begins a stream: activation state is
//           initialised, act and m_len are latched, busy rises. Input bits
//           presented with start are not consumed.
//   in_valid while busy, the x/w bits of this cycle are consumed.
//   z, z_valid  the output bit for the bits consumed one cycle earlier
//           (latency 1 cycle, throughput 1 bit per cycle).
//   done    one-cycle pulse together with the z_valid of the m_len-th bit;
//           busy falls in the same cycle. m_len = 0 ends the stream at once.
// The stream length m is a run-time input: accuracy can be traded for time
// and energy without changing the hardware. An act value outside the enum
// selects ReLU.
//
// Reference configuration (defaults): N = 25 inputs per convolution block
// (5x5 receptive field), Q = 4 (2x2 average pooling), streams of up to
// M_MAX = 1024 bits. E = 8 counter states and ALPHA = 16 history bits are
// this design's choices. POOL_FRAC = 1 keeps the pooled sum's low bits in
// the activation counter (exact mean); 0 drops them as the plain pooling
// adder does (see sc_sat_counter for the consequence).
module sc_neuron
  import sc_pkg::*;
#(
  parameter int unsigned N     = DEF_N,
  parameter int unsigned Q     = DEF_Q,
  parameter int unsigned E     = DEF_E,
  parameter int unsigned ALPHA = DEF_ALPHA,
  parameter int unsigned M_MAX = DEF_M,
  parameter bit          POOL_FRAC = DEF_POOL_FRAC,
  localparam int unsigned CW = $clog2(N + 1),
  localparam int unsigned QW = $clog2(Q),
  localparam int unsigned SW = $clog2(E),
  localparam int unsigned MW = $clog2(M_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  act_e          act,
  input  logic [MW-1:0] m_len,
  input  logic          in_valid,
  input  logic [N-1:0]  x [Q],
  input  logic [N-1:0]  w [Q],
  output logic          busy,
  output logic          z,
  output logic          z_valid,
  output logic          done
);

  localparam logic [SW-1:0] BOUND_TANH = SW'(E / 2);

  // ---------------------------------------------------------------- control
  act_e          act_q;
  logic [MW-1:0] m_q;
  logic [MW-1:0] k;
  logic          accept;
  logic          is_tanh;

  assign accept  = busy && in_valid && !start;
  assign is_tanh = (act_q == ACT_TANH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      act_q <= ACT_TANH;
      m_q   <= '0;
      k     <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= (m_len != '0);
        act_q <= act;
        m_q   <= m_len;
        k     <= '0;
        done  <= (m_len == '0);
      end else if (accept) begin
        k <= k + 1'b1;
        if (k + 1'b1 == m_q) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // -------------------------------------------------- convolution + pooling
  logic [CW-1:0] cnt [Q];
  logic [CW-1:0] avg;
  logic [QW-1:0] frac;

  for (genvar j = 0; j < Q; j++) begin : g_conv
    sc_conv_block #(.N(N)) u_conv (.x(x[j]), .w(w[j]), .cnt(cnt[j]));
  end

  sc_avg_pool #(.N(N), .Q(Q)) u_pool (.cnt(cnt), .avg(avg), .frac(frac));

  // ------------------------------------------------------------- activation
  logic tanh_z;
  logic lr_z;

  sc_sat_counter #(.N(N), .Q(Q), .E(E), .POOL_FRAC(POOL_FRAC)) u_tanh (
    .clk   (clk),
    .rst_n (rst_n),
    .init  (start),
    .en    (accept && is_tanh),
    .bound (BOUND_TANH),
    .avg   (avg),
    .frac  (frac),
    .state (),
    .s_next(),
    .z_next(tanh_z)
  );

  sc_logrelu_act #(.N(N), .Q(Q), .E(E), .ALPHA(ALPHA), .POOL_FRAC(POOL_FRAC)) u_lr (
    .clk  (clk),
    .rst_n(rst_n),
    .init (start),
    .en   (accept && !is_tanh),
    .beta (act == ACT_LOGISTIC),
    .avg  (avg),
    .frac (frac),
    .z    (lr_z),
    .comp ()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z       <= 1'b0;
      z_valid <= 1'b0;
    end else begin
      z_valid <= accept;
      if (accept) z <= is_tanh ? tanh_z : lr_z;
    end
  end

  // A stream never consumes more bits than it was started with.
  assert property (@(posedge clk) disable iff (!rst_n) accept |-> (k < m_q))
    else $error("sc_neuron: more input bits consumed than m_len");

endmodule

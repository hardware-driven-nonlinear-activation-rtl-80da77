// tb_sc_neuron: end-to-end test of the neuron cell at its default size
// (25 inputs per convolution block, 4-to-1 pooling, streams of 1024 bits).
//
// A stochastic number generator in the testbench turns chosen bipolar
// values for all 100 inputs and 100 weights into bit streams. Every output
// bit is compared with an integer model of the neuron algorithm run on the
// same bits (XNOR products, counts, pooled sum / 4, saturated counter,
// history compensation for logistic and ReLU), and the handshake is
// checked: z_valid one cycle after each consumed bit, done with the last
// one, idle cycles (in_valid low) consume nothing. The decoded output
// value is also checked against the shape of each activation function.
// Mechanisms counted, each of which must occur: all three activation
// modes, switching between them, saturation at both ends of the counter,
// negative-value compensation, idle input cycles, a restart in the middle
// of a stream, an empty stream (m_len = 0) and a short stream.
module tb_sc_neuron;
  import sc_pkg::*;
  localparam int N = DEF_N;
  localparam int Q = DEF_Q;
  localparam int E = DEF_E;
  localparam int ALPHA = DEF_ALPHA;
  localparam int M = DEF_M;
  localparam int MW = $clog2(M + 1);

  logic clk = 0, rst_n = 0, start = 0, in_valid = 0;
  act_e act = ACT_TANH;
  logic [MW-1:0] m_len = '0;
  logic [N-1:0] x [Q];
  logic [N-1:0] w [Q];
  logic busy, z, z_valid, done;
  always #5 clk = ~clk;

  sc_neuron dut (.*);

  int checks = 0, failures = 0;
  int n_sat_lo = 0, n_sat_hi = 0, n_comp = 0, n_idle = 0, n_switch = 0, n_restart = 0;
  int n_empty = 0, n_short = 0;
  int n_mode [3] = '{0, 0, 0};

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // Bipolar value v in [-1,1] -> stream bit with P(1) = (v+1)/2.
  function automatic logic sng(real v);
    return real'($urandom_range(65535)) < (v + 1.0) * 32768.0;
  endfunction

  // Runs one stream and returns the fraction of ones in the output.
  // abort_at >= 0 issues a new start after that many consumed bits.
  task automatic run_stream(input act_e a, input int m, input real xv [Q][N],
                            input real wv [Q][N], input int idle_pct,
                            input int abort_at, output real ones_frac);
    int s, bnd, nxt, zm, delta, k, cyc, ones, pc, tsum;
    bit h [ALPHA];
    bit acc;
    @(negedge clk);
    start = 1; act = a; m_len = MW'(m);
    @(posedge clk);
    #1;
    bnd = Q * ((a == ACT_LOGISTIC) ? E / 4 : E / 2);
    s = bnd; delta = 0;
    foreach (h[i]) h[i] = 0;
    check(busy == (m != 0), "busy after start");
    check(done == (m == 0), "done for empty stream");
    @(negedge clk);
    start = 0;
    k = 0; cyc = 0; ones = 0;
    while (k < m) begin
      in_valid = ($urandom_range(99) >= idle_pct);
      for (int j = 0; j < Q; j++)
        for (int i = 0; i < N; i++) begin
          x[j][i] = sng(xv[j][i]);
          w[j][i] = sng(wv[j][i]);
        end
      // reference model of one algorithm step
      tsum = 0;
      for (int j = 0; j < Q; j++) begin
        pc = 0;
        for (int i = 0; i < N; i++) pc += (x[j][i] == w[j][i]) ? 1 : 0;
        tsum += pc;
      end
      // counter state kept in 1/Q units (exact pooled mean)
      nxt = s;
      if (a != ACT_TANH && delta < ALPHA / 2) zm = 1;
      else begin
        nxt = s + 2 * tsum - Q * N;
        if (in_valid && nxt < 0) n_sat_lo++;
        if (in_valid && nxt > Q * E - 1) n_sat_hi++;
        if (nxt < 0) nxt = 0;
        if (nxt > Q * E - 1) nxt = Q * E - 1;
        zm = (nxt >= bnd) ? 1 : 0;
      end
      if (abort_at >= 0 && k == abort_at) begin
        // restart mid-stream: the bits shown with start are not consumed
        start = 1; in_valid = 1;
        @(posedge clk);
        #1;
        check(z_valid == 0, "no output on restart cycle");
        n_restart++;
        @(negedge clk);
        start = 0; in_valid = 0;
        s = bnd; delta = 0;
        foreach (h[i]) h[i] = 0;
        k = 0; ones = 0; cyc = 0;
        abort_at = -1;
        continue;
      end
      acc = in_valid;
      @(posedge clk);
      #1;
      cyc++;
      check(z_valid == acc, "z_valid follows consumed bit by one cycle");
      if (acc) begin
        k++;
        if (a != ACT_TANH && delta < ALPHA / 2) n_comp++;
        check(z == zm[0], $sformatf("output bit %0d of stream (mode %s)", k, a.name()));
        ones += zm;
        s = nxt;
        delta = delta + zm - int'(h[ALPHA-1]);
        for (int r = ALPHA - 1; r >= 1; r--) h[r] = h[r-1];
        h[0] = zm[0];
        check(done == (k == m), "done with last bit");
        check(busy == (k < m), "busy until last bit");
      end else begin
        n_idle++;
        check(done == 0, "no done on idle cycle");
      end
      @(negedge clk);
    end
    in_valid = 0;
    check(cyc >= m, "one cycle per bit at least");
    ones_frac = (m > 0) ? real'(ones) / real'(m) : 0.0;
  endtask

  initial begin
    real xv [Q][N], wv [Q][N];
    real f, y;
    real fv [3];
    act_e prev;
    foreach (x[j]) begin x[j] = '0; w[j] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    prev = ACT_TANH;

    for (int a = 0; a < 3; a++) begin
      for (int sgn = -1; sgn <= 1; sgn = (sgn == -1) ? 1 : (sgn == 1 ? 0 : 2)) begin
        // strongly negative (sgn=-1), strongly positive (1), then zero (0)
        y = 0.0;
        for (int j = 0; j < Q; j++)
          for (int i = 0; i < N; i++) begin
            if (sgn == 0) begin
              xv[j][i] = (real'($urandom_range(200)) - 100.0) / 100.0;
              wv[j][i] = 0.0;
            end else begin
              xv[j][i] = 0.8;
              wv[j][i] = 0.8 * real'(sgn);
            end
            y += xv[j][i] * wv[j][i] / real'(Q);
          end
        if (act_e'(a) != prev) n_switch++;
        prev = act_e'(a);
        n_mode[a]++;
        run_stream(act_e'(a), M, xv, wv, 10, -1, f);
        $display("mode %-12s y=%7.2f  output ones %.3f  value %6.3f", prev.name(), y, f, 2.0 * f - 1.0);
        fv[sgn + 1] = 2.0 * f - 1.0;
        // shape of the activation, in bipolar output value 2f-1
        if (sgn > 0)
          check(fv[2] > 0.8, "large positive input gives an output near 1");
        else if (sgn < 0) begin
          if (act_e'(a) == ACT_TANH) check(fv[0] < -0.8, "tanh of large negative near -1");
          else check(fv[0] > -0.2 && fv[0] < 0.3, "logistic / ReLU of large negative near 0");
        end else begin
          check(fv[0] < fv[1] && fv[1] < fv[2], "output rises with the input");
          case (act_e'(a))
            ACT_TANH:     check(fv[1] > -0.25 && fv[1] < 0.25, "tanh of 0 near 0");
            ACT_LOGISTIC: check(fv[1] > 0.25 && fv[1] < 0.75, "logistic of 0 near 0.5");
            default:      check(fv[1] > -0.15 && fv[1] < 0.4, "ReLU of 0 near 0");
          endcase
        end
      end
    end

    // short stream, restart in the middle of a stream, empty stream
    run_stream(ACT_RELU, 64, xv, wv, 30, -1, f);
    n_short++;
    run_stream(ACT_TANH, 200, xv, wv, 0, 57, f);
    n_switch++;
    run_stream(ACT_LOGISTIC, 0, xv, wv, 0, -1, f);
    n_empty++;
    @(negedge clk);
    check(busy == 0 && done == 0, "idle after empty stream");

    $display("modes %0d/%0d/%0d switches %0d sat_lo %0d sat_hi %0d comp %0d idle %0d restart %0d empty %0d short %0d",
             n_mode[0], n_mode[1], n_mode[2], n_switch, n_sat_lo, n_sat_hi, n_comp, n_idle,
             n_restart, n_empty, n_short);
    check(n_mode[0] > 0 && n_mode[1] > 0 && n_mode[2] > 0, "all modes used");
    check(n_switch > 0, "mode switch happened");
    check(n_sat_lo > 0 && n_sat_hi > 0, "counter saturated at both ends");
    check(n_comp > 0, "negative-value compensation happened");
    check(n_idle > 0, "idle input cycles happened");
    check(n_restart > 0 && n_empty > 0 && n_short > 0, "restart, empty and short streams ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

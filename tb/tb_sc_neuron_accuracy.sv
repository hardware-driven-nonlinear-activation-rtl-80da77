// tb_sc_neuron_accuracy: accuracy sweep of the neuron cell against the
// software activation functions, at the default size of the cell.
//
// For each activation (tanh, logistic, ReLU), each input size (16 and 25
// input/weight pairs per convolution block; with 16, the spare lanes carry
// zero-valued streams of P(1) = 0.5) and each stream length (16, 64, 256,
// 1024 bits), random bipolar inputs and weights in [-1,1] are drawn, the
// cell runs one stream, and the decoded output 2*ones/m - 1 is compared
// with the software neuron f(y), y = mean over the 4 blocks of the inner
// products, f = tanh, 1/(1+exp(-y)) or min(max(y,0),1) (the stochastic
// output range ends at 1). The mean absolute error of every point is
// printed. Checks: at 1024 bits the error stays below 0.2, and it falls
// as the stream grows from 16 to 1024 bits.
module tb_sc_neuron_accuracy;
  import sc_pkg::*;
  localparam int N = DEF_N;
  localparam int Q = DEF_Q;
  localparam int MW = $clog2(DEF_M + 1);
  localparam int SAMPLES = 24;

  logic clk = 0, rst_n = 0, start = 0, in_valid = 0;
  act_e act = ACT_TANH;
  logic [MW-1:0] m_len = '0;
  logic [N-1:0] x [Q];
  logic [N-1:0] w [Q];
  logic busy, z, z_valid, done;
  always #5 clk = ~clk;

  sc_neuron dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic sng(real v);
    return real'($urandom_range(65535)) < (v + 1.0) * 32768.0;
  endfunction

  function automatic real f_sw(act_e a, real y);
    case (a)
      ACT_TANH:     return (1.0 - $exp(-2.0 * y)) / (1.0 + $exp(-2.0 * y));
      ACT_LOGISTIC: return 1.0 / (1.0 + $exp(-y));
      default:      return (y < 0.0) ? 0.0 : ((y > 1.0) ? 1.0 : y);
    endcase
  endfunction

  task automatic run_one(input act_e a, input int m, input int n_used, output real err);
    real xv [Q][N], wv [Q][N], y;
    int ones;
    y = 0.0;
    for (int j = 0; j < Q; j++)
      for (int i = 0; i < N; i++) begin
        if (i < n_used) begin
          xv[j][i] = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
          wv[j][i] = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
        end else begin
          xv[j][i] = 0.0;
          wv[j][i] = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
        end
        y += xv[j][i] * wv[j][i] / real'(Q);
      end
    @(negedge clk);
    start = 1; act = a; m_len = MW'(m);
    @(negedge clk);
    start = 0;
    ones = 0;
    for (int k = 0; k < m; k++) begin
      in_valid = 1;
      for (int j = 0; j < Q; j++)
        for (int i = 0; i < N; i++) begin
          x[j][i] = sng(xv[j][i]);
          w[j][i] = sng(wv[j][i]);
        end
      @(posedge clk);
      #1;
      if (z_valid) ones += int'(z);
      @(negedge clk);
    end
    in_valid = 0;
    @(posedge clk);
    #1;
    if (z_valid) ones += int'(z);
    err = 2.0 * real'(ones) / real'(m) - 1.0 - f_sw(a, y);
    if (err < 0.0) err = -err;
  endtask

  initial begin
    static int lens [4] = '{16, 64, 256, 1024};
    static int sizes [2] = '{16, 25};
    real e, mean [4];
    foreach (x[j]) begin x[j] = '0; w[j] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 3; a++)
      foreach (sizes[s]) begin
        foreach (lens[l]) begin
          mean[l] = 0.0;
          for (int t = 0; t < SAMPLES; t++) begin
            run_one(act_e'(a), lens[l], sizes[s], e);
            mean[l] += e / real'(SAMPLES);
          end
        end
        $display("%-12s n=%0d  mean |error|  m=16 %.3f  m=64 %.3f  m=256 %.3f  m=1024 %.3f",
                 act_e'(a) == ACT_TANH ? "tanh" : (act_e'(a) == ACT_LOGISTIC ? "logistic" : "ReLU"),
                 sizes[s], mean[0], mean[1], mean[2], mean[3]);
        checks++;
        if (mean[3] > 0.2) begin
          failures++;
          $display("FAIL error at m=1024 above 0.2");
        end
        checks++;
        if (mean[3] >= mean[0]) begin
          failures++;
          $display("FAIL error does not fall with stream length");
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

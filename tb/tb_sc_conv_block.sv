// tb_sc_conv_block: checks the convolution block's count of XNOR ones on
// random vectors, and that the bipolar value 2*cnt/N - 1 averaged over a
// stream matches the inner product of the encoded values.
module tb_sc_conv_block;
  localparam int N = 25;
  localparam int CW = $clog2(N + 1);
  logic [N-1:0] x, w;
  logic [CW-1:0] cnt;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  sc_conv_block #(.N(N)) dut (.x(x), .w(w), .cnt(cnt));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expct;
    real xv [N], wv [N], dot, acc;
    for (int t = 0; t < 3000; t++) begin
      x = N'({$urandom, $urandom});
      w = N'({$urandom, $urandom});
      #1;
      expct = 0;
      for (int i = 0; i < N; i++) if (x[i] == w[i]) expct++;
      checks++;
      if (int'(cnt) != expct) begin
        failures++;
        $display("x=%b w=%b cnt=%0d expected %0d", x, w, cnt, expct);
      end
    end
    // Stream test: the mean of 2*cnt - N estimates sum_i x_i * w_i.
    dot = 0.0;
    for (int i = 0; i < N; i++) begin
      xv[i] = (real'($urandom_range(200)) - 100.0) / 100.0;
      wv[i] = (real'($urandom_range(200)) - 100.0) / 100.0;
      dot += xv[i] * wv[i];
    end
    acc = 0.0;
    for (int t = 0; t < 8192; t++) begin
      for (int i = 0; i < N; i++) begin
        x[i] = (real'($urandom_range(9999)) < (xv[i] + 1.0) * 5000.0);
        w[i] = (real'($urandom_range(9999)) < (wv[i] + 1.0) * 5000.0);
      end
      #1;
      acc += real'(2 * int'(cnt) - N);
    end
    acc = acc / 8192.0;
    checks++;
    if (acc - dot > 0.35 || dot - acc > 0.35) begin
      failures++;
      $display("stream inner product %f expected %f", acc, dot);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

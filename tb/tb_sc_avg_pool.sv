// tb_sc_avg_pool: checks the pooling adder outputs (sum of four counts with
// the two low bits dropped, and the dropped bits) on corner cases and
// random counts.
module tb_sc_avg_pool;
  localparam int N = 25;
  localparam int Q = 4;
  localparam int CW = $clog2(N + 1);
  logic [CW-1:0] cnt [Q];
  logic [CW-1:0] avg;
  logic [1:0] frac;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  sc_avg_pool #(.N(N), .Q(Q)) dut (.cnt(cnt), .avg(avg), .frac(frac));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    for (int t = 0; t < 5000; t++) begin
      s = 0;
      for (int j = 0; j < Q; j++) begin
        if (t == 0)      cnt[j] = '0;
        else if (t == 1) cnt[j] = CW'(N);
        else             cnt[j] = CW'($urandom_range(N));
        s += int'(cnt[j]);
      end
      #1;
      checks++;
      if (int'(avg) != s / Q || int'(frac) != s % Q) begin
        failures++;
        $display("sum=%0d avg=%0d frac=%0d", s, avg, frac);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

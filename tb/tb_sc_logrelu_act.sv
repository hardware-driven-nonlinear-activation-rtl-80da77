// tb_sc_logrelu_act: compares the logistic/ReLU activation bit by bit with
// an integer model of its algorithm (compensation 1 while fewer than half
// of the last ALPHA outputs are ones, counter frozen in that cycle;
// otherwise saturated counter, output S >= boundary, boundary E/4 for
// logistic, E/2 for ReLU, stepping by the exact pooled mean, kept in 1/Q units). Both modes run; compensation, counter-driven outputs and
// saturation are each counted and must occur.
module tb_sc_logrelu_act;
  localparam int N = 25;
  localparam int Q = 4;
  localparam int E = 8;
  localparam int ALPHA = 16;
  localparam int CW = $clog2(N + 1);

  logic clk = 0, rst_n = 0, init = 0, en = 0, beta = 0;
  logic [CW-1:0] avg;
  logic [1:0] frac;
  logic z, comp;
  int checks = 0, failures = 0, n_comp = 0, n_cnt = 0, n_sat = 0, n_streams [2];
  always #5 clk = ~clk;

  sc_logrelu_act #(.N(N), .Q(Q), .E(E), .ALPHA(ALPHA)) dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, bnd, nxt, zm, delta, bias, sum;
    bit h [ALPHA];
    n_streams[0] = 0; n_streams[1] = 0;
    avg = '0; frac = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int str = 0; str < 40; str++) begin
      beta = str[0];
      bias = $urandom_range(Q * N);
      init = 1;
      @(posedge clk);
      bnd = Q * (beta ? E / 4 : E / 2);
      s = bnd; delta = 0;
      foreach (h[i]) h[i] = 0;
      n_streams[beta]++;
      @(negedge clk);
      init = 0;
      beta = 1'($urandom_range(1));   // must be ignored until the next init
      for (int k = 0; k < 512; k++) begin
        sum = bias + int'($urandom_range(16)) - 8;
        if (sum < 0) sum = 0;
        if (sum > Q * N) sum = Q * N;
        avg = CW'(sum / Q); frac = 2'(sum % Q);
        en = ($urandom_range(15) != 0);
        #1;
        nxt = s;
        if (delta < ALPHA / 2) zm = 1;
        else begin
          nxt = s + 2 * sum - Q * N;
          if (nxt < 0 || nxt > Q * E - 1) n_sat += en;
          if (nxt < 0) nxt = 0;
          if (nxt > Q * E - 1) nxt = Q * E - 1;
          zm = (nxt >= bnd) ? 1 : 0;
        end
        checks++;
        if (z != zm[0] || comp != (delta < ALPHA / 2)) begin
          failures++;
          if (failures < 10) $display("str=%0d k=%0d z=%b expected %0d comp=%b", str, k, z, zm, comp);
        end
        @(posedge clk);
        if (en) begin
          if (delta < ALPHA / 2) n_comp++; else n_cnt++;
          s = nxt;
          delta = delta + zm - int'(h[ALPHA-1]);
          for (int r = ALPHA - 1; r >= 1; r--) h[r] = h[r-1];
          h[0] = zm[0];
        end
        @(negedge clk);
      end
    end
    checks++;
    if (n_comp == 0 || n_cnt == 0 || n_sat == 0 || n_streams[0] == 0 || n_streams[1] == 0) failures++;
    $display("compensation %0d counter %0d saturation %0d", n_comp, n_cnt, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

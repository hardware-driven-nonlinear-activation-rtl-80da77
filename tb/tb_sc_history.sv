// tb_sc_history: shifts random bits through the history array and compares
// the shadow counter with the number of ones among the last ALPHA bits
// (kept in a queue), and the sign flag with delta < ALPHA/2.
module tb_sc_history;
  localparam int ALPHA = 16;
  localparam int DW = $clog2(ALPHA + 1);

  logic clk = 0, rst_n = 0, init = 0, en = 0, z_in = 0;
  logic [DW-1:0] delta;
  logic neg;
  int checks = 0, failures = 0, n_neg = 0, n_pos = 0;
  always #5 clk = ~clk;

  sc_history #(.ALPHA(ALPHA)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit hist [$];
    int sum, p1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < ALPHA; i++) hist.push_back(1'b0);
    p1 = 50;
    for (int t = 0; t < 20000; t++) begin
      if (t % 300 == 0) p1 = $urandom_range(100);
      z_in = ($urandom_range(99) < p1);
      en = ($urandom_range(7) != 0);
      init = ($urandom_range(1999) == 0);
      #1;
      sum = 0;
      foreach (hist[i]) sum += int'(hist[i]);
      checks++;
      if (int'(delta) != sum || neg != (sum < ALPHA / 2)) begin
        failures++;
        if (failures < 10) $display("t=%0d delta=%0d expected %0d neg=%b", t, delta, sum, neg);
      end
      if (neg) n_neg++; else n_pos++;
      @(posedge clk);
      if (init) begin
        hist.delete();
        for (int i = 0; i < ALPHA; i++) hist.push_back(1'b0);
      end else if (en) begin
        hist.push_front(z_in);
        void'(hist.pop_back());
      end
      @(negedge clk);
    end
    checks++;
    if (n_neg == 0 || n_pos == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

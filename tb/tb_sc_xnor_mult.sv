// tb_sc_xnor_mult: checks the XNOR multiplier array lane by lane on random
// vectors, and checks that the product of two long bipolar streams encodes
// the product of their values.
module tb_sc_xnor_mult;
  localparam int N = 25;
  logic [N-1:0] x, w, p;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  sc_xnor_mult #(.N(N)) dut (.x(x), .w(w), .p(p));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    for (int t = 0; t < 2000; t++) begin
      x = N'({$urandom, $urandom});
      w = N'({$urandom, $urandom});
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (p[i] != (x[i] == w[i])) begin
          failures++;
          $display("lane %0d: x=%b w=%b p=%b", i, x[i], w[i], p[i]);
        end
      end
    end
    // Bipolar product: a = 0.5 (P=0.75), b = -0.5 (P=0.25) -> -0.25 (P=0.375)
    ones = 0;
    for (int t = 0; t < 8000; t++) begin
      x = '0; w = '0;
      x[0] = ($urandom_range(999) < 750);
      w[0] = ($urandom_range(999) < 250);
      #1;
      ones += p[0];
    end
    checks++;
    if (ones < 2800 || ones > 3200) begin
      failures++;
      $display("bipolar product: %0d ones of 8000, expected about 3000", ones);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

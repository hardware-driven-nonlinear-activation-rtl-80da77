// tb_sc_sat_counter: runs two saturated counters, one keeping the pooled
// fraction bits (default) and one using the truncated mean, against an
// integer model of the activation update
//   exact:     S <- clamp(S + (2*sum - Q*N)/Q, 0, E - 1/Q)   (in 1/Q units)
//   truncated: S <- clamp(S + 2*floor(sum/Q) - N, 0, E-1)
// with output S >= boundary, on random pooled sums, enables, inits and both
// boundaries. Saturation at each end is counted and must occur.
module tb_sc_sat_counter;
  localparam int N = 25;
  localparam int Q = 4;
  localparam int E = 8;
  localparam int CW = $clog2(N + 1);
  localparam int SW = $clog2(E);

  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic [SW-1:0] bound;
  logic [CW-1:0] avg;
  logic [1:0] frac;
  logic [SW-1:0] state [2], s_next [2];
  logic z_next [2];
  int checks = 0, failures = 0, sat_lo = 0, sat_hi = 0;
  always #5 clk = ~clk;

  sc_sat_counter #(.N(N), .Q(Q), .E(E), .POOL_FRAC(1'b0)) dut0 (
    .clk(clk), .rst_n(rst_n), .init(init), .en(en), .bound(bound), .avg(avg), .frac(frac),
    .state(state[0]), .s_next(s_next[0]), .z_next(z_next[0]));
  sc_sat_counter #(.N(N), .Q(Q), .E(E), .POOL_FRAC(1'b1)) dut1 (
    .clk(clk), .rst_n(rst_n), .init(init), .en(en), .bound(bound), .avg(avg), .frac(frac),
    .state(state[1]), .s_next(s_next[1]), .z_next(z_next[1]));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s_model [2], nxt [2], unit [2], sum, bias, st;
    unit[0] = 1; unit[1] = Q;
    bound = SW'(E / 2);
    avg = '0; frac = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    init = 1;
    @(negedge clk);
    init = 0;
    s_model[0] = E / 2; s_model[1] = Q * E / 2;
    bias = Q * N / 2;
    for (int t = 0; t < 20000; t++) begin
      if (t % 400 == 0) bias = $urandom_range(Q * N);
      sum = bias + int'($urandom_range(16)) - 8;
      if (sum < 0) sum = 0;
      if (sum > Q * N) sum = Q * N;
      avg = CW'(sum / Q); frac = 2'(sum % Q);
      en = ($urandom_range(9) != 0);
      init = ($urandom_range(999) == 0);
      if (init) bound = ($urandom_range(1) != 0) ? SW'(E / 4) : SW'(E / 2);
      #1;
      nxt[0] = s_model[0] + 2 * (sum / Q) - N;
      nxt[1] = s_model[1] + 2 * sum - Q * N;
      for (int v = 0; v < 2; v++) begin
        st = nxt[v];
        if (st < 0) st = 0;
        if (st > unit[v] * E - 1) st = unit[v] * E - 1;
        checks++;
        if (int'(state[v]) != s_model[v] / unit[v] || int'(s_next[v]) != st / unit[v] ||
            z_next[v] != (st >= unit[v] * int'(bound))) begin
          failures++;
          if (failures < 10)
            $display("t=%0d frac-mode=%0d state=%0d s_next=%0d z=%b model %0d -> %0d", t, v,
                     state[v], s_next[v], z_next[v], s_model[v], st);
        end
        nxt[v] = st;
      end
      @(posedge clk);
      if (init) begin
        s_model[0] = int'(bound);
        s_model[1] = Q * int'(bound);
      end else if (en) begin
        if (s_model[1] + 2 * sum - Q * N < 0) sat_lo++;
        if (s_model[1] + 2 * sum - Q * N > Q * E - 1) sat_hi++;
        s_model = nxt;
      end
      @(negedge clk);
    end
    checks++;
    if (sat_lo == 0 || sat_hi == 0) failures++;
    $display("saturations: low %0d high %0d", sat_lo, sat_hi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

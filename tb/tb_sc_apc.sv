// tb_sc_apc: compares the parallel counter with $countones on random and
// corner-case vectors.
module tb_sc_apc;
  localparam int N = 25;
  localparam int CW = $clog2(N + 1);
  logic [N-1:0] p;
  logic [CW-1:0] cnt;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  sc_apc #(.N(N)) dut (.p(p), .cnt(cnt));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input logic [N-1:0] v);
    p = v;
    #1;
    checks++;
    if (int'(cnt) != $countones(v)) begin
      failures++;
      $display("p=%b cnt=%0d expected %0d", v, cnt, $countones(v));
    end
  endtask

  initial begin
    check_one('0);
    check_one('1);
    for (int i = 0; i < N; i++) check_one(N'(1) << i);
    for (int t = 0; t < 5000; t++) check_one(N'({$urandom, $urandom}));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

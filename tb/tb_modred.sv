// Self-checking test of modred: the products of all corner pairs, 20000
// random inputs in [0, (q-1)^2 + 2q] and the upper end of that range, each
// compared with c mod q, and the 3-cycle latency.
module tb_modred;
  logic clk = 0, rst_n = 0, v_in = 0;
  logic [25:0] c = 0;
  logic v_out;
  logic [12:0] d;
  int checks = 0, failures = 0;
  int exp_q[$];
  int lat_first = -1, cyc = 0;
  always #5 clk = ~clk;

  modred dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) begin
    cyc++;
    if (rst_n && v_out) begin
      checks++;
      if (lat_first < 0) lat_first = cyc;
      if (exp_q.size() == 0 || int'(d) != exp_q[0]) begin failures++; $display("FAIL got %0d exp %0d", d, exp_q[0]); end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
  end

  task automatic send(input int x);
    c = 26'(x); v_in = 1; exp_q.push_back(x % 7681);
    @(negedge clk);
  endtask

  initial begin
    int start_cyc;
    repeat (3) @(negedge clk); rst_n = 1;
    // latency: one input after an idle pipeline
    c = 26'(12345); v_in = 1; exp_q.push_back(12345 % 7681);
    @(negedge clk); v_in = 0;
    start_cyc = 1;
    while (!v_out && start_cyc < 10) begin @(negedge clk); start_cyc++; end
    checks++; if (start_cyc != 3) begin failures++; $display("FAIL latency %0d", start_cyc); end
    @(negedge clk);
    send(7680 * 7680);
    send(0); send(7680); send(7681); send(8191); send(1 << 25); send(7680*7680 + 2*7681);
    for (int i = 0; i < 20000; i++) send(int'($urandom_range(0, 7680*7680 + 2*7681)));
    for (int i = 0; i < 2000; i++) send(7680*7680 + 2*7681 - i);
    v_in = 0;
    repeat (5) @(negedge clk);
    checks++; if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

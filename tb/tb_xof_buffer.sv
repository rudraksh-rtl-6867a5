// Self-checking test of xof_buffer: the paper's two uses (13-bit coefficients
// packed into 64-bit absorb blocks; 64-bit XOF words unpacked into 13-bit and
// 8-bit chunks), compared with a bit-queue model kept in the testbench.
module tb_xof_buffer;
  logic clk = 0, rst_n = 0, clear = 0, push = 0, pop = 0;
  logic [6:0] push_w = 0, pop_w = 0, cnt;
  logic [63:0] push_data = 0, data;
  int checks = 0, failures = 0;
  bit q[$];
  always #5 clk = ~clk;

  xof_buffer dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic step(input bit dpush, input int pw, input logic [63:0] pd, input bit dpop, input int ow);
    logic [63:0] exp;
    push = dpush; push_w = 7'(pw); push_data = pd; pop = dpop; pop_w = 7'(ow);
    // check what is popped this cycle
    if (dpop) begin
      exp = '0;
      for (int i = 0; i < ow; i++) exp[i] = q[i];
      checks++;
      if ((data & ((ow == 64) ? '1 : ((64'd1 << ow) - 1))) !== exp) begin
        failures++; $display("FAIL pop %0d bits: %h exp %h", ow, data, exp);
      end
      for (int i = 0; i < ow; i++) void'(q.pop_front());
    end
    if (dpush) for (int i = 0; i < pw; i++) q.push_back(pd[i]);
    @(negedge clk);
    push = 0; pop = 0;
    checks++;
    if (int'(cnt) != q.size()) begin failures++; $display("FAIL cnt %0d exp %0d", cnt, q.size()); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // packing: 13-bit coefficients in, 64-bit blocks out
    for (int i = 0; i < 300; i++) begin
      step(1, 13, 64'($urandom_range(0, 8191)), q.size() >= 64, 64);
      checks++; if (int'(cnt) > 76) begin failures++; $display("FAIL width"); end
    end
    clear = 1; @(negedge clk); clear = 0; q.delete();
    // unpacking: 64-bit words in, 13-bit candidates out
    for (int i = 0; i < 300; i++) begin
      if (q.size() < 13) step(1, 64, {$urandom, $urandom}, q.size() >= 13, 13);
      else step(0, 0, 0, 1, 13);
    end
    clear = 1; @(negedge clk); clear = 0; q.delete();
    // unpacking into 8-bit CBD pairs
    for (int i = 0; i < 200; i++) begin
      if (q.size() < 8) step(1, 64, {$urandom, $urandom}, 0, 8);
      else step(0, 0, 0, 1, 8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

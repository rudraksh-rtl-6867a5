// Self-checking test of rej_sampler: random 13-bit candidates plus the edge
// values q-1, q and 8191; accepted values, their indices and the stop after 64.
module tb_rej_sampler;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic [12:0] in_data = 0, out_coeff;
  logic out_valid, full;
  logic [5:0] out_idx;
  int checks = 0, failures = 0;
  int exp_q[$];
  int nacc = 0;
  int sent_acc, v;
  always #5 clk = ~clk;

  rej_sampler dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0 || out_coeff != 13'(exp_q[0]) || int'(out_idx) != nacc) begin
      failures++; $display("FAIL got %0d idx %0d exp %0d n %0d sz %0d", out_coeff, out_idx, exp_q[0], nacc, exp_q.size());
    end
    if (exp_q.size() != 0) void'(exp_q.pop_front());
    nacc++;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 5; round++) begin
      sent_acc = 0;
      nacc = 0;
      for (int i = 0; i < 100; i++) begin
        v = (i % 17 == 0) ? 7680 : (i % 17 == 1) ? 7681 : (i % 17 == 2) ? 8191 : int'($urandom_range(0, 8191));
        in_data = 13'(v); in_valid = 1;
        if (v < 7681 && sent_acc < 64) begin exp_q.push_back(v); sent_acc++; end
        @(negedge clk);
      end
      in_valid = 0; @(negedge clk); @(negedge clk);
      checks++; if (!full || nacc != 64 || exp_q.size() != 0) begin failures++; $display("FAIL count %0d", nacc); end
      clear = 1; @(negedge clk); clear = 0;
      checks++; if (full) begin failures++; $display("FAIL clear"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Self-checking test of cbd_sampler: all 256 input bytes for the two lanes,
// compared with HW(a0,a1) - HW(a2,a3) mod q computed here.
module tb_cbd_sampler;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [7:0] in_bits = 0;
  logic out_valid;
  logic [1:0][12:0] out_coeff;
  int checks = 0, failures = 0;
  int hist[5];
  int a, b, e;
  always #5 clk = ~clk;

  cbd_sampler dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int v = 0; v < 256; v++) begin
      in_bits = 8'(v); in_valid = 1; @(negedge clk);
      for (int l = 0; l < 2; l++) begin
        a = (v >> (4*l)) & 15;
        b = (a & 1) + ((a >> 1) & 1) - ((a >> 2) & 1) - ((a >> 3) & 1);
        e = (b < 0) ? 7681 + b : b;
        checks++;
        if (!out_valid || int'(out_coeff[l]) != e) begin failures++; $display("FAIL %0d lane %0d: %0d", v, l, out_coeff[l]); end
        if (l == 0) hist[b+2]++;
      end
    end
    // binomial shape over one lane: 1 4 6 4 1 per 16 nibbles (x16 repeats)
    checks++; if (hist[0] != 16 || hist[1] != 64 || hist[2] != 96 || hist[3] != 64 || hist[4] != 16) failures++;
    in_valid = 0; @(negedge clk);
    checks++; if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

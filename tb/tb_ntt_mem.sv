// Self-checking test of ntt_mem: random simultaneous reads and writes on
// both banks against a model, including a read and a write of the same word
// in one cycle (the read returns the old value).
module tb_ntt_mem;
  logic clk = 0;
  logic [1:0] re = 0, we = 0;
  logic [1:0][4:0] raddr = 0, waddr = 0;
  logic [1:0][12:0] rdata, wdata = 0;
  int checks = 0, failures = 0;
  int model[2][32];
  int exp[2];
  bit chk[2];
  always #5 clk = ~clk;
  ntt_mem dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int bk = 0; bk < 2; bk++) for (int i = 0; i < 32; i++) begin
      we[bk] = 1; waddr[bk] = 5'(i); wdata[bk] = 13'(i * 37 + bk); model[bk][i] = i * 37 + bk;
      @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 2000; t++) begin
      for (int bk = 0; bk < 2; bk++) begin
        re[bk] = 1'($urandom); raddr[bk] = 5'($urandom);
        we[bk] = 1'($urandom); waddr[bk] = (t % 5 == 0) ? raddr[bk] : 5'($urandom); wdata[bk] = 13'($urandom);
        chk[bk] = re[bk]; exp[bk] = model[bk][raddr[bk]];
      end
      @(negedge clk);
      for (int bk = 0; bk < 2; bk++) begin
        if (we[bk]) model[bk][waddr[bk]] = int'(wdata[bk]);
        if (chk[bk]) begin checks++; if (int'(rdata[bk]) != exp[bk]) begin failures++; $display("FAIL bank %0d", bk); end end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

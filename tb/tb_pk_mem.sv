// Self-checking test of pk_mem: fill all 1344 words, read them back, then
// random reads and writes against a model.
module tb_pk_mem;
  logic clk = 0, we = 0;
  logic [1:0] re = 0;
  logic [1:0][10:0] raddr = 0;
  logic [10:0] waddr = 0;
  logic [1:0][12:0] rdata;
  logic [12:0] wdata = 0;
  int exp1;
  bit chk1;
  int checks = 0, failures = 0;
  int model[1344];
  int exp;
  bit chk;
  always #5 clk = ~clk;
  pk_mem dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 1344; i++) begin
      we = 1; waddr = 11'(i); wdata = 13'((i * 7919) % 8192); model[i] = (i * 7919) % 8192;
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 1344; i++) begin
      re = 2'b11; raddr[0] = 11'(i); raddr[1] = 11'(1343 - i); @(negedge clk);
      checks++; if (int'(rdata[0]) != model[i] || int'(rdata[1]) != model[1343 - i]) failures++;
    end
    for (int t = 0; t < 3000; t++) begin
      re = 2'($urandom); raddr[0] = 11'($urandom_range(0, 1343)); raddr[1] = 11'($urandom_range(0, 1343));
      we = 1'($urandom); waddr = (t % 4 == 0) ? raddr[1] : 11'($urandom_range(0, 1343)); wdata = 13'($urandom);
      chk = re[0]; exp = model[raddr[0]]; chk1 = re[1]; exp1 = model[raddr[1]];
      @(negedge clk);
      if (we) model[waddr] = int'(wdata);
      if (chk) begin checks++; if (int'(rdata[0]) != exp) failures++; end
      if (chk1) begin checks++; if (int'(rdata[1]) != exp1) failures++; end
    end
    re = 0; we = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

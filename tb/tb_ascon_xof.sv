// Self-checking test of ascon_xof: random-length inputs absorbed block by
// block and several squeezed words, compared with the reference sponge; the
// 3-absorb / 4-squeeze sequence used for secret sampling must take 84 cycles.
module tb_ascon_xof;
  import rudraksh_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic init = 0, absorb = 0, last = 0, squeeze = 0;
  logic [63:0] blk = 0, out;
  logic [5:0] nbits = 0;
  logic out_valid, busy;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ascon_xof dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic one(input int len, input int nout, input bit check_cycles);
    logic [63:0] msg[], exp[], got;
    int nblk, cyc, t0;
    msg = new[(len + 64) / 64];
    foreach (msg[i]) msg[i] = {$urandom, $urandom};
    ref_xof(msg, len, nout, exp);
    nblk = (len + 1 + 63) / 64;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    t0 = $time;
    for (int i = 0; i < nblk; i++) begin
      while (busy) @(negedge clk);
      blk = msg[i]; last = (i == nblk - 1); nbits = 6'(len - 64*i); absorb = 1;
      @(negedge clk); absorb = 0;
    end
    for (int i = 0; i < nout; i++) begin
      while (busy) @(negedge clk);
      squeeze = 1; @(negedge clk); squeeze = 0;
      checks++;
      if (!out_valid || out !== exp[i]) begin failures++; $display("FAIL len %0d word %0d %h/%h", len, i, out, exp[i]); end
    end
    while (busy) @(negedge clk);
    cyc = int'(($time - t0) / 10);
    if (check_cycles) begin
      checks++;
      if (cyc != 84) begin failures++; $display("FAIL cycles %0d", cyc); end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    one(136, 4, 1);           // 16-byte seed + nonce, one secret polynomial
    one(144, 13, 0);          // seed + two indices, a matrix polynomial
    for (int i = 0; i < 20; i++) one(int'($urandom_range(0, 400)), int'($urandom_range(1, 5)), 0);
    one(63, 2, 0); one(64, 2, 0); one(0, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

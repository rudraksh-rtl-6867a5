// Self-checking test of ascon_perm: the known-answer state of ASCON-XOF after
// p^12 of IV||0, plus random states against a reference model of the round
// written here independently, and the 12-cycle latency.
module tb_ascon_perm;
  logic clk = 0, rst_n = 0, start = 0, load = 0;
  logic [319:0] si, so;
  logic busy, done;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ascon_perm dut (.clk, .rst_n, .load, .start, .state_i(si), .state_o(so), .busy, .done);

  function automatic logic [63:0] rr(logic [63:0] x, int n); return (x >> n) | (x << (64-n)); endfunction
  function automatic logic [319:0] ref_p12(logic [319:0] st);
    logic [63:0] s[5], t[5];
    for (int k = 0; k < 5; k++) s[k] = st[319-64*k -: 64];
    for (int i = 0; i < 12; i++) begin
      s[2] ^= 64'(((15 - i) << 4) | i);
      s[0] ^= s[4]; s[4] ^= s[3]; s[2] ^= s[1];
      for (int k = 0; k < 5; k++) t[k] = ~s[k] & s[(k+1)%5];
      for (int k = 0; k < 5; k++) s[k] ^= t[(k+1)%5];
      s[1] ^= s[0]; s[0] ^= s[4]; s[3] ^= s[2]; s[2] = ~s[2];
      s[0] ^= rr(s[0],19) ^ rr(s[0],28); s[1] ^= rr(s[1],61) ^ rr(s[1],39);
      s[2] ^= rr(s[2],1) ^ rr(s[2],6);   s[3] ^= rr(s[3],10) ^ rr(s[3],17);
      s[4] ^= rr(s[4],7) ^ rr(s[4],41);
    end
    return {s[0], s[1], s[2], s[3], s[4]};
  endfunction

  task automatic run(input logic [319:0] x, input logic [319:0] exp);
    int cyc = 0;
    @(negedge clk); si = x; start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++; if (so !== exp) begin failures++; $display("FAIL state %h", so); end
    checks++; if (cyc != 12) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    si = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run({64'h00400c0000000000, 256'd0},
        {64'hb57e273b814cd416, 64'h2b51042562ae2420, 64'h66a3a7768ddf2218,
         64'h5aad0a7a8153650c, 64'h4f3e0e32539493b6});
    for (int i = 0; i < 20; i++) begin
      logic [319:0] r;
      for (int k = 0; k < 10; k++) r[32*k +: 32] = $urandom;
      run(r, ref_p12(r));
    end
    @(negedge clk); si = {5{64'h0123456789abcdef}}; load = 1; @(negedge clk); load = 0;
    checks++; if (so !== {5{64'h0123456789abcdef}} || busy) begin failures++; $display("FAIL load"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

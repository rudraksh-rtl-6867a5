// Self-checking test of twiddle_rom: every entry against 202^brv6(k) mod q
// computed by repeated multiplication here, and zeta^64 = -1 (primitive
// 128th root), entry 1 squared = -1.
module tb_twiddle_rom;
  import rudraksh_ref_pkg::*;
  logic [5:0] addr;
  logic [12:0] zeta;
  int checks = 0, failures = 0;
  int r;
  twiddle_rom dut (.*);
  initial begin
    for (int k = 0; k < 64; k++) begin
      r = 0;
      for (int i = 0; i < 6; i++) r |= ((k >> i) & 1) << (5 - i);
      addr = 6'(k); #1;
      checks++; if (int'(zeta) != powq(202, r)) begin failures++; $display("FAIL %0d: %0d", k, zeta); end
    end
    checks++; if (powq(202, 64) != RQ - 1) failures++;
    addr = 1; #1;
    checks++; if (modq(longint'(zeta) * zeta) != RQ - 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Self-checking test of butterfly: random operands for every mode and
// variant, streamed one per cycle, compared with arithmetic mod q done here;
// the compress/decompress results are also compared with exact rounding
// (round(2^d x / q) and round(q x / 2^d)); the latency must be 6 cycles.
module tb_butterfly;
  import rudraksh_pkg::*;
  import rudraksh_ref_pkg::*;
  logic clk = 0, rst_n = 0, v_in = 0;
  bf_mode_e mode = BF_NTT;
  fsel_e fsel = FS_U;
  coeff_t a = 0, b = 0, c = 0, w = 0, out0, out1;
  logic [15:0] tag = 0, tag_out;
  logic v_out;
  int checks = 0, failures = 0, exact_miss = 0;
  int e0_q[$], e1_q[$], tag_q[$];
  always #5 clk = ~clk;

  butterfly dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && v_out) begin
    checks++;
    if (e0_q.size() == 0 || int'(out0) != e0_q[0] || int'(out1) != e1_q[0] || int'(tag_out) != tag_q[0]) begin
      failures++; $display("FAIL tag %0d: %0d %0d exp %0d %0d", tag_out, out0, out1, e0_q[0], e1_q[0]);
    end
    if (e0_q.size() != 0) begin void'(e0_q.pop_front()); void'(e1_q.pop_front()); void'(tag_q.pop_front()); end
  end

  function automatic int half(int x); return (x % 2 == 0) ? x / 2 : (x + RQ) / 2; endfunction

  task automatic op(input bf_mode_e m, input fsel_e f, input int ia, input int ib, input int ic, input int iw);
    int r0, r1;
    longint x;
    r0 = 0; r1 = 0;
    case (m)
      BF_NTT:  begin r0 = modq(ia + longint'(iw) * ib); r1 = modq(ia - longint'(iw) * ib); end
      BF_INTT: begin r0 = half(modq(ia + ib)); r1 = half(modq(longint'(iw) * (ib - ia))); end
      BF_MAC:  r0 = modq(longint'(ia) * ib + ic);
      BF_ADD:  r0 = modq(ia + ib);
      BF_SUB:  r0 = modq(ia - ib);
      BF_COMP: begin
        int d = (f == FS_U) ? 10 : (f == FS_V) ? 5 : 2;
        int k = (f == FS_U) ? 32 : (f == FS_V) ? 27 : 30;
        x = (longint'(ia) << d) + 3840;
        r0 = int'(((x * ((64'd1 << k) / RQ + 1)) >> k) & ((1 << d) - 1));
        // exact rounding, round half up
        if (r0 != int'((((longint'(ia) << (d + 1)) + RQ) / (2 * RQ)) % (1 << d))) exact_miss++;
      end
      BF_DECOMP: begin
        int d = (f == FS_U) ? 10 : (f == FS_V) ? 5 : 2;
        r0 = int'((longint'(RQ) * ia + (1 << (d - 1))) >> d);
        if (r0 != int'((2 * longint'(RQ) * ia + (1 << d)) / (2 << d))) exact_miss++;
      end
      default: ;
    endcase
    mode = m; fsel = f; a = coeff_t'(ia); b = coeff_t'(ib); c = coeff_t'(ic); w = coeff_t'(iw);
    v_in = 1; tag = tag + 1;
    e0_q.push_back(r0); e1_q.push_back(r1); tag_q.push_back(int'(tag));
    @(negedge clk);
    v_in = 0;
  endtask

  initial begin
    int lat, m, ra, rb, rc, rw;
    repeat (3) @(negedge clk); rst_n = 1;
    // latency
    op(BF_MAC, FS_U, 3, 4, 5, 0);
    lat = 1;
    while (!v_out) begin @(negedge clk); lat++; end
    checks++; if (lat != 6) begin failures++; $display("FAIL latency %0d", lat); end
    @(negedge clk);
    for (int i = 0; i < 3000; i++) begin
      m = i % 7;
      ra = int'($urandom_range(0, RQ - 1)); rb = int'($urandom_range(0, RQ - 1));
      rc = int'($urandom_range(0, RQ - 1)); rw = int'($urandom_range(0, RQ - 1));
      if (i < 14) begin ra = RQ - 1; rb = RQ - 1; rc = RQ - 1; rw = RQ - 1; end
      case (m)
        0: op(BF_NTT, FS_U, ra, rb, 0, rw);
        1: op(BF_INTT, FS_U, ra, rb, 0, rw);
        2: op(BF_MAC, FS_U, ra, rb, rc, 0);
        3: op(BF_ADD, FS_U, ra, rb, 0, 0);
        4: op(BF_SUB, FS_U, ra, rb, 0, 0);
        5: op(BF_COMP, fsel_e'(2'(i % 3)), ra, 0, 0, 0);
        default: op(BF_DECOMP, fsel_e'(2'(i % 3)), (i % 3 == 0) ? ra % 1024 : (i % 3 == 1) ? ra % 32 : ra % 4, 0, 0, 0);
      endcase
    end
    // every compress input value, all three variants
    for (int x = 0; x < RQ; x++) op(BF_COMP, fsel_e'(2'(x % 3)), x, 0, 0, 0);
    repeat (10) @(negedge clk);
    checks++; if (e0_q.size() != 0) failures++;
    // the paper's 2^32/q+1 constant misses exact rounding for one 10-bit input only
    checks++; if (exact_miss > 1) begin failures++; $display("FAIL exact rounding misses %0d", exact_miss); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

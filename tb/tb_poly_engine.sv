// Testbench of poly_engine. The M2 memory is modelled here (two read ports,
// one write port, one-cycle read latency) so that the test can load and
// inspect polynomials directly. Checks, each on random data:
//   - copy M2 -> M0/M1 -> M2 returns the polynomial unchanged;
//   - INTT(NTT(a)) = a;
//   - INTT(NTT(a) o NTT(b)) equals the negacyclic product a*b mod (x^64+1, q)
//     of a schoolbook reference (point-wise MAC pass with zero accumulator)
//     and, with accumulation, a*b + c*d;
//   - a CBD pass equals the reference: sponge over seed_s || nonce, four
//     squeezed words, each byte giving HW(b0,b1)-HW(b2,b3) then the same for
//     the upper nibble;
//   - an A-hat pass with M = 1 everywhere equals the reference rejection
//     sampler (13-bit LSB-first chunks of the squeezed stream, kept if < q),
//     and with a random M and a random accumulator gives A*M + acc point-wise;
//   - compress_u of a polynomial matches round(1024 x / q) mod 1024 up to
//     the single known rounding difference (see butterfly);
//   - the encode / decode pair through msg_in / msg_out returns the message;
//   - compare mode writes nothing and flags exactly a changed ciphertext.
// The hash pass is checked in the top-level testbench against the reference
// sponge (H(pk), G and H(c, z)).
module tb_poly_engine;
  import rudraksh_pkg::*;
  import rudraksh_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         start, busy, done, rej_drop;
  eng_cmd_t     cmd;
  logic [127:0] seed_a, seed_s, msg_in, msg_out;
  logic [1:0]   m2_re;
  logic [1:0][M2_AW-1:0] m2_raddr;
  coeff_t [1:0] m2_rdata;
  logic         m2_we;
  logic [M2_AW-1:0] m2_waddr;
  coeff_t       m2_wdata;
  logic [127:0] hw0, hw1, hw2;
  logic [255:0] h_out;
  logic         neq_clr, cmp_neq;

  int checks = 0, failures = 0;

  poly_engine dut (.*);

  coeff_t mem [M2_DEPTH];
  always @(posedge clk) begin
    for (int p = 0; p < 2; p++) if (m2_re[p]) m2_rdata[p] <= mem[m2_raddr[p]];
    if (m2_we) mem[m2_waddr] <= m2_wdata;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic eng_cmd_t mk(input pass_e o, input ev_e e, input bf_mode_e m);
    eng_cmd_t x;
    x = '0; x.op = o; x.ev = e; x.mode = m;
    x.asel = A_ZERO; x.bsel = B_ZERO; x.csel = C_ZERO; x.dsel = D_M;
    return x;
  endfunction

  task automatic run(input eng_cmd_t c);
    @(negedge clk);
    cmd = c; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (busy) @(negedge clk);
  endtask

  task automatic load_m(input int src);
    eng_cmd_t x;
    x = mk(P_STREAM, EV_MEM, BF_ADD); x.asel = A_M2A; x.a_base = 11'(src);
    run(x);
  endtask

  task automatic store_m(input int dst, input bf_mode_e m, input fsel_e f);
    eng_cmd_t x;
    x = mk(P_STREAM, EV_MEM, m); x.fsel = f; x.asel = A_M; x.dsel = D_M2; x.d_base = 11'(dst);
    run(x);
  endtask

  task automatic xform(input pass_e o);
    run(mk(o, EV_MEM, o == P_NTT ? BF_NTT : BF_INTT));
  endtask

  task automatic mac(input int src, input int acc, input bit first);
    eng_cmd_t x;
    x = mk(P_STREAM, EV_MEM, BF_MAC); x.asel = A_M2A; x.a_base = 11'(src); x.bsel = B_M;
    x.csel = first ? C_ZERO : C_M2B; x.b_base = 11'(acc); x.dsel = D_M2; x.d_base = 11'(acc);
    run(x);
  endtask

  task automatic put_rand(input int base, output int p[64]);
    for (int k = 0; k < 64; k++) begin
      p[k] = int'($urandom_range(Q - 1));
      mem[base + k] = coeff_t'(p[k]);
    end
  endtask

  task automatic cmp(input int base, input int p[64], input string what);
    int bad;
    bad = 0;
    for (int k = 0; k < 64; k++) if (int'(mem[base + k]) != p[k]) begin
      if (bad == 0) $display("  %s: k=%0d got %0d exp %0d", what, k, mem[base + k], p[k]);
      bad++;
    end
    check(bad == 0, $sformatf("%s: %0d coefficients differ", what, bad));
  endtask

  // reference CBD polynomial
  function automatic void ref_cbd(input logic [127:0] sd, input logic [7:0] nonce, output int p[64]);
    logic [63:0] msg[], out[];
    logic [7:0] by;
    int t;
    msg = new[3];
    msg[0] = sd[63:0]; msg[1] = sd[127:64]; msg[2] = {56'd0, nonce};
    ref_xof(msg, 136, 4, out);
    for (int w = 0; w < 4; w++)
      for (int b = 0; b < 8; b++) begin
        by = out[w][8*b +: 8];
        for (int h = 0; h < 2; h++) begin
          t = int'(by[4*h]) + int'(by[4*h+1]) - int'(by[4*h+2]) - int'(by[4*h+3]);
          p[16*w + 2*b + h] = modq(t);
        end
      end
  endfunction

  // reference rejection sampling of A-hat[row][col]
  function automatic void ref_rej(input logic [127:0] sd, input logic [7:0] row, input logic [7:0] col,
                                  output int p[64]);
    logic [63:0] msg[], out[];
    int k, pos, v;
    msg = new[3];
    msg[0] = sd[63:0]; msg[1] = sd[127:64]; msg[2] = {48'd0, col, row};
    ref_xof(msg, 144, 40, out);
    k = 0; pos = 0;
    while (k < 64) begin
      v = 0;
      for (int b = 0; b < 13; b++) v |= int'(out[(pos + b) / 64][(pos + b) % 64]) << b;
      pos += 13;
      if (v < RQ) begin
        p[k] = v;
        k++;
      end
    end
  endfunction

  initial begin
    int a[64], b[64], c[64], d[64], r[64], r2[64], e[64];
    eng_cmd_t x;
    start = 1'b0; cmd = '0; seed_a = '0; seed_s = '0; msg_in = '0;
    hw0 = '0; hw1 = '0; hw2 = '0; neq_clr = 1'b0;
    for (int i = 0; i < M2_DEPTH; i++) mem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int t = 0; t < 3; t++) begin
      // copy
      put_rand(0, a);
      load_m(0); store_m(64, BF_ADD, FS_U);
      cmp(64, a, "copy");
      // NTT / INTT identity
      load_m(0); xform(P_NTT); xform(P_INTT); store_m(64, BF_ADD, FS_U);
      cmp(64, a, "intt(ntt(a))");
      // product
      put_rand(128, b);
      load_m(0); xform(P_NTT); store_m(256, BF_ADD, FS_U);
      load_m(128); xform(P_NTT);
      mac(256, 320, 1'b1);
      load_m(320); xform(P_INTT); store_m(384, BF_ADD, FS_U);
      ref_polymul(a, b, r);
      cmp(384, r, "a*b");
      // accumulate c*d
      put_rand(0, c); put_rand(128, d);
      load_m(0); xform(P_NTT); store_m(256, BF_ADD, FS_U);
      load_m(128); xform(P_NTT);
      mac(256, 320, 1'b0);
      load_m(320); xform(P_INTT); store_m(384, BF_ADD, FS_U);
      ref_polymul(c, d, r2);
      for (int k = 0; k < 64; k++) r2[k] = modq(longint'(r2[k]) + r[k]);
      cmp(384, r2, "a*b + c*d");

      // CBD
      seed_s = {$urandom, $urandom, $urandom, $urandom};
      x = mk(P_STREAM, EV_CBD, BF_ADD); x.bsel = B_XOF; x.idx0 = 8'($urandom_range(18));
      run(x);
      store_m(448, BF_ADD, FS_U);
      ref_cbd(seed_s, x.idx0, e);
      cmp(448, e, "cbd");

      // A-hat with M = 1
      seed_a = {$urandom, $urandom, $urandom, $urandom};
      for (int k = 0; k < 64; k++) mem[512 + k] = 13'd1;
      load_m(512);
      x = mk(P_STREAM, EV_REJ, BF_MAC); x.asel = A_XOF; x.bsel = B_M; x.csel = C_ZERO;
      x.dsel = D_M2; x.d_base = 11'd576; x.a_base = 11'd576;
      x.idx0 = 8'($urandom_range(8)); x.idx1 = 8'($urandom_range(8));
      run(x);
      ref_rej(seed_a, x.idx0, x.idx1, r);
      cmp(576, r, "a-hat");
      // A-hat * M + acc
      put_rand(0, b); put_rand(640, c);
      load_m(0);
      x.csel = C_M2A; x.a_base = 11'd640; x.d_base = 11'd640;
      run(x);
      for (int k = 0; k < 64; k++) r2[k] = modq(longint'(r[k]) * b[k] + c[k]);
      cmp(640, r2, "a-hat * m + acc");

      // compress_u
      put_rand(0, a);
      load_m(0); store_m(704, BF_COMP, FS_U);
      for (int k = 0; k < 64; k++) r[k] = ((a[k] * 1024 + 3840) / 7681) % 1024;
      for (int k = 0; k < 64; k++) if (a[k] == 5772) r[k] = int'(mem[704 + k]);
      cmp(704, r, "compress_u");

      // encode / decode
      msg_in = {$urandom, $urandom, $urandom, $urandom};
      x = mk(P_STREAM, EV_MEM, BF_DECOMP); x.fsel = FS_MSG; x.asel = A_MSG; x.dsel = D_M;
      run(x);
      x = mk(P_STREAM, EV_MEM, BF_COMP); x.fsel = FS_MSG; x.asel = A_M; x.dsel = D_MSG;
      run(x);
      check(msg_out == msg_in, $sformatf("encode/decode %h vs %h", msg_out, msg_in));

      // compare mode: storing compress_u(M) over itself matches, a changed word does not
      load_m(0);
      @(negedge clk); neq_clr = 1'b1; @(negedge clk); neq_clr = 1'b0;
      x = mk(P_STREAM, EV_MEM, BF_COMP); x.fsel = FS_U; x.asel = A_M; x.dsel = D_M2;
      x.d_base = 11'd704; x.cmp = 1'b1;
      run(x);
      check(!cmp_neq, "compare of identical data flagged a difference");
      mem[704 + $urandom_range(63)] ^= 13'd1;
      for (int k = 0; k < 64; k++) r[k] = int'(mem[704 + k]);
      run(x);
      check(cmp_neq, "compare missed a changed coefficient");
      cmp(704, r, "compare mode must not write");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule

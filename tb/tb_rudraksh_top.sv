// End-to-end testbench of rudraksh_top at its default (KEM-poly64) size.
//
// For several random seed sets it runs KeyGen, then Enc of a random 128-bit
// message, then Dec, and checks:
//   - the decrypted message equals the encrypted one;
//   - the ciphertext read back through the host port has u < 2^10 and
//     v < 2^5 in every coefficient;
//   - the public key has all coefficients below q;
//   - the numbers of engine passes of each kind (CBD samples, A-hat
//     polynomials, NTTs, INTTs, compressions, decompressions, point-wise
//     products) are those of the scheme: e.g. KeyGen samples 18 CBD
//     polynomials, 81 A-hat polynomials and runs 18 NTTs;
//   - candidates are rejected (some A-hat samples are >= q) and the
//     number of accepted A-hat coefficients is 81 * 64 per KeyGen/Enc;
//   - cycle counts stay within a loose window around the paper's figures.
// A last run decrypts with a different seed_se and checks that the message
// is then not recovered (the check catches a core that ignores the key).
// The cycle counts of each operation are printed for comparison with the
// paper's (KeyGen 23310, Enc 28114, Dec 35110 cycles for its own schedule).
module tb_rudraksh_top;
  import rudraksh_pkg::*;
  import rudraksh_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         start, busy, done, h_re, h_we, rej_drop;
  logic [2:0]   op;
  logic [127:0] seed_a, seed_se, seed_r, msg, msg_out, z, key, pkh;
  logic         reject;
  logic [M2_AW-1:0] h_addr;
  coeff_t       h_wdata, h_rdata;

  int checks = 0, failures = 0;

  rudraksh_top dut (.*);

  // ---- mechanism counters (engine commands as they are started)
  int n_cbd, n_rej, n_ntt, n_intt, n_comp, n_decomp, n_mac, n_drop, n_accept;
  always @(posedge clk) begin
    if (dut.u_eng.start && !dut.u_eng.busy) begin
      eng_cmd_t c;
      c = dut.u_eng.cmd;
      if (c.op == P_NTT) n_ntt <= n_ntt + 1;
      else if (c.op == P_INTT) n_intt <= n_intt + 1;
      else begin
        if (c.ev == EV_CBD) n_cbd <= n_cbd + 1;
        if (c.ev == EV_REJ) n_rej <= n_rej + 1;
        if (c.ev == EV_MEM && c.mode == BF_COMP) n_comp <= n_comp + 1;
        if (c.ev == EV_MEM && c.mode == BF_DECOMP) n_decomp <= n_decomp + 1;
        if (c.ev == EV_MEM && c.mode == BF_MAC) n_mac <= n_mac + 1;
      end
    end
    if (rej_drop) n_drop <= n_drop + 1;
    if (dut.u_eng.r_ovalid) n_accept <= n_accept + 1;
  end

  task automatic clear_counts();
    n_cbd = 0; n_rej = 0; n_ntt = 0; n_intt = 0; n_comp = 0; n_decomp = 0;
    n_mac = 0; n_drop = 0; n_accept = 0;
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_op(input logic [2:0] o, output int cycles);
    @(negedge clk);
    op = o; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  task automatic read_m2(input int addr, output coeff_t d);
    @(negedge clk);
    h_re = 1'b1; h_addr = M2_AW'(addr);
    @(negedge clk);
    h_re = 1'b0;
    d = h_rdata;
  endtask

  function automatic logic [127:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    int cyc_k, cyc_e, cyc_d, bad, drops;
    coeff_t d;
    logic [127:0] m;
    start = 1'b0; op = '0; h_re = 1'b0; h_we = 1'b0; h_addr = '0; h_wdata = '0;
    seed_a = '0; seed_se = '0; seed_r = '0; msg = '0; z = '0;
    clear_counts();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int run = 0; run < 3; run++) begin
      seed_a = rnd128(); seed_se = rnd128(); seed_r = rnd128(); m = rnd128();
      if (run == 1) m = '0;
      msg = m;

      clear_counts();
      run_op(3'd0, cyc_k);
      check(n_cbd == 18 && n_rej == 81 && n_ntt == 18 && n_intt == 0,
            $sformatf("keygen passes cbd=%0d rej=%0d ntt=%0d intt=%0d", n_cbd, n_rej, n_ntt, n_intt));
      check(n_accept == 81*64, $sformatf("keygen accepted %0d", n_accept));
      check(n_drop > 0, "keygen: no candidate of A-hat was rejected");
      drops = n_drop;
      bad = 0;
      for (int a = 0; a < L*N; a++) begin
        read_m2(M2_PK + a, d);
        if (d >= Q) bad++;
      end
      check(bad == 0, $sformatf("public key: %0d coefficients >= q", bad));

      clear_counts();
      run_op(3'd1, cyc_e);
      check(n_cbd == 19 && n_rej == 81 && n_ntt == 9 && n_intt == 10 && n_comp == 10 && n_decomp == 1
            && n_mac == 9,
            $sformatf("enc passes cbd=%0d rej=%0d ntt=%0d intt=%0d comp=%0d decomp=%0d mac=%0d",
                      n_cbd, n_rej, n_ntt, n_intt, n_comp, n_decomp, n_mac));
      check(n_accept == 81*64, $sformatf("enc accepted %0d", n_accept));
      bad = 0;
      for (int a = 0; a < L*N; a++) begin
        read_m2(M2_CTU + a, d);
        if (d >= 1024) bad++;
      end
      for (int a = 0; a < N; a++) begin
        read_m2(M2_CTV + a, d);
        if (d >= 32) bad++;
      end
      check(bad == 0, $sformatf("ciphertext: %0d coefficients out of range", bad));

      msg = rnd128();   // the message input must not matter for Dec
      clear_counts();
      run_op(3'd2, cyc_d);
      check(n_cbd == 9 && n_ntt == 18 && n_intt == 1 && n_decomp == 10 && n_comp == 1 && n_mac == 9,
            $sformatf("dec passes cbd=%0d ntt=%0d intt=%0d decomp=%0d comp=%0d mac=%0d",
                      n_cbd, n_ntt, n_intt, n_decomp, n_comp, n_mac));
      check(msg_out == m, $sformatf("run %0d: decrypted %h expected %h", run, msg_out, m));
      check(cyc_k > 5000 && cyc_k < 100000 && cyc_e > 5000 && cyc_e < 100000 &&
            cyc_d > 2000 && cyc_d < 100000, "cycle counts out of window");
      $display("run %0d: KeyGen %0d cycles, Enc %0d cycles, Dec %0d cycles, KeyGen A-hat rejections %0d",
               run, cyc_k, cyc_e, cyc_d, drops);
    end

    // wrong secret key: the message must not come back
    seed_se = ~seed_se;
    run_op(3'd2, cyc_d);
    check(msg_out != m, "decryption with a wrong key recovered the message");

    // ---- KEM: KeyGen, Encaps, Decaps, and Decaps of a tampered ciphertext
    for (int run = 0; run < 2; run++) begin
      logic [63:0] hin[], hout[];
      logic [127:0] k_enc, ref_pkh, ref_k, ref_kbar;
      int nb;
      seed_a = rnd128(); seed_se = rnd128(); z = rnd128(); msg = rnd128(); seed_r = rnd128();
      run_op(3'd3, cyc_k);
      // reference H(pk): seed_a then the 576 b-hat coefficients, 13 bits each, LSB first
      hin = new[(128 + 576*13 + 63) / 64];
      foreach (hin[w]) hin[w] = '0;
      hin[0] = seed_a[63:0]; hin[1] = seed_a[127:64];
      nb = 128;
      for (int a = 0; a < L*N; a++) begin
        read_m2(M2_PK + a, d);
        for (int b = 0; b < 13; b++) begin
          hin[nb / 64][nb % 64] = d[b];
          nb++;
        end
      end
      ref_xof(hin, nb, 2, hout);
      ref_pkh = {hout[1], hout[0]};
      check(pkh == ref_pkh, $sformatf("KEM KeyGen: pkh %h expected %h", pkh, ref_pkh));
      // Encaps
      run_op(3'd4, cyc_e);
      hin = new[4];
      hin[0] = pkh[63:0]; hin[1] = pkh[127:64]; hin[2] = msg[63:0]; hin[3] = msg[127:64];
      ref_xof(hin, 256, 4, hout);
      ref_k = {hout[1], hout[0]};
      k_enc = key;
      check(key == ref_k, $sformatf("Encaps: key %h expected G(pkh, m) %h", key, ref_k));
      // Decaps of the honest ciphertext
      msg = rnd128(); seed_r = rnd128();
      run_op(3'd5, cyc_d);
      check(!reject && key == k_enc, $sformatf("Decaps: reject=%0d key %h expected %h", reject, key, k_enc));
      check(msg_out != '0 || k_enc != '0, "Decaps produced nothing");
      $display("KEM run %0d: KeyGen %0d, Encaps %0d, Decaps %0d cycles", run, cyc_k, cyc_e, cyc_d);
      // tamper with one coefficient of u or v and decapsulate again
      begin
        int ta;
        coeff_t old;
        ta = M2_CTU + int'($urandom_range(L*N + N - 1));
        read_m2(ta, old);
        @(negedge clk);
        h_we = 1'b1; h_addr = M2_AW'(ta); h_wdata = (ta < M2_CTV) ? ((old + 1) % 1024) : ((old + 1) % 32);
        @(negedge clk);
        h_we = 1'b0;
      end
      // reference H(c, z): u (10-bit), v (5-bit), z
      hin = new[(576*10 + 64*5 + 128 + 63) / 64];
      foreach (hin[w]) hin[w] = '0;
      nb = 0;
      for (int a = 0; a < L*N + N; a++) begin
        read_m2(M2_CTU + a, d);
        for (int b = 0; b < ((a < L*N) ? 10 : 5); b++) begin
          hin[nb / 64][nb % 64] = d[b];
          nb++;
        end
      end
      for (int b = 0; b < 128; b++) begin
        hin[nb / 64][nb % 64] = z[b];
        nb++;
      end
      ref_xof(hin, nb, 2, hout);
      ref_kbar = {hout[1], hout[0]};
      run_op(3'd5, cyc_d);
      check(reject, "Decaps of a tampered ciphertext did not reject");
      check(key == ref_kbar, $sformatf("Decaps reject key %h expected H(c, z) %h", key, ref_kbar));
      check(key != k_enc, "Decaps of a tampered ciphertext returned the real key");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule

// Testbench of rudraksh_ctrl with a behavioural stand-in for the engine:
// the stub raises busy for a random number of cycles after each accepted
// command and then pulses done. For each operation the test records the
// command stream and checks:
//   - the number of commands (KeyGen 126, Enc 150, Dec 59);
//   - the CBD nonce sequence: KeyGen 0..8 then 9..17; Enc 0..8, 9..17, 18;
//     Dec 0..8;
//   - the (row, column) order of the A-hat passes: KeyGen visits A[i][j]
//     with the column j of the current secret, Enc visits A[j][i];
//   - every A-hat pass is a multiply-accumulate into M2 with a zero
//     accumulator exactly for the first secret polynomial;
//   - the CBD seed selection (r only during Enc and re-encryption);
//   - the re-encryption operation turns exactly the 10 stores of u and v
//     into compares, and the three hash operations issue one P_HASH
//     command each with the ranges of pk, of nothing (G) and of u || v;
//   - a command is never started while the engine is busy, and done comes
//     exactly once per operation.
module tb_rudraksh_ctrl;
  import rudraksh_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      start, busy, done, sel_r, e_start, e_busy, e_done;
  logic [2:0] op;
  eng_cmd_t  e_cmd;

  int checks = 0, failures = 0;

  rudraksh_ctrl dut (.*);

  // engine stub
  int cnt;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_busy <= 1'b0; e_done <= 1'b0; cnt <= 0;
    end else begin
      e_done <= 1'b0;
      if (e_start && !e_busy) begin
        e_busy <= 1'b1;
        cnt    <= int'($urandom_range(6));
      end else if (e_busy) begin
        if (cnt == 0) begin
          e_busy <= 1'b0;
          e_done <= 1'b1;
        end else cnt <= cnt - 1;
      end
    end
  end

  eng_cmd_t log_q[$];
  int ndone, nsel_bad, ncollide;
  logic [2:0] cur_op;
  always @(posedge clk) if (rst_n) begin
    if (e_start && !e_busy) begin
      log_q.push_back(e_cmd);
      if (sel_r != (cur_op == 3'd1 || cur_op == 3'd3)) nsel_bad++;
    end
    if (e_start && e_busy && e_done) ncollide++;
    if (done) ndone++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_op(input logic [2:0] o);
    log_q.delete();
    ndone = 0;
    cur_op = o;
    @(negedge clk);
    op = o; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    repeat (5) @(negedge clk);
  endtask

  initial begin
    int nonces[$], exp_n[$], nrej, bad_rej;
    start = 1'b0; op = '0; nsel_bad = 0; ncollide = 0; cur_op = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int o = 0; o < 3; o++) begin
      run_op(3'(o));
      check(log_q.size() == (o == 0 ? 126 : o == 1 ? 150 : 59),
            $sformatf("op %0d: %0d commands", o, log_q.size()));
      check(ndone == 1, $sformatf("op %0d: done %0d times", o, ndone));
      nonces.delete(); exp_n.delete();
      nrej = 0; bad_rej = 0;
      foreach (log_q[n]) begin
        if (log_q[n].op == P_STREAM && log_q[n].ev == EV_CBD) nonces.push_back(int'(log_q[n].idx0));
        if (log_q[n].op == P_STREAM && log_q[n].ev == EV_REJ) begin
          // n-th A-hat pass: secret index s = nrej / 9, target index t = nrej % 9
          int sidx, tidx;
          sidx = nrej / 9; tidx = nrej % 9;
          if (o == 0 && !(log_q[n].idx0 == 8'(tidx) && log_q[n].idx1 == 8'(sidx))) bad_rej++;
          if (o == 1 && !(log_q[n].idx0 == 8'(sidx) && log_q[n].idx1 == 8'(tidx))) bad_rej++;
          if (log_q[n].mode != BF_MAC || log_q[n].dsel != D_M2) bad_rej++;
          if ((log_q[n].csel == C_ZERO) != (sidx == 0)) bad_rej++;
          nrej++;
        end
      end
      for (int k = 0; k < 9; k++) exp_n.push_back(k);
      if (o != 2) for (int k = 9; k < 18; k++) exp_n.push_back(k);
      if (o == 1) exp_n.push_back(18);
      check(nonces == exp_n, $sformatf("op %0d: CBD nonces %p", o, nonces));
      check(nrej == (o == 2 ? 0 : 81), $sformatf("op %0d: %0d A-hat passes", o, nrej));
      check(bad_rej == 0, $sformatf("op %0d: %0d A-hat pass errors", o, bad_rej));
    end
    // re-encryption: Enc with the u and v stores turned into compares
    run_op(3'd3);
    begin
      int ncmp, nwr;
      ncmp = 0; nwr = 0;
      foreach (log_q[n]) begin
        if (log_q[n].cmp) ncmp++;
        if (log_q[n].cmp && !(log_q[n].mode == BF_COMP && log_q[n].dsel == D_M2 &&
                              log_q[n].d_base >= 11'(M2_CTU) && log_q[n].d_base <= 11'(M2_CTV))) nwr++;
      end
      check(log_q.size() == 150 && ncmp == 10 && nwr == 0,
            $sformatf("enc-compare: %0d commands, %0d compares, %0d bad", log_q.size(), ncmp, nwr));
    end
    // hash operations: one P_HASH command each
    for (int o = 4; o < 7; o++) begin
      run_op(3'(o));
      check(log_q.size() == 1 && log_q[0].op == P_HASH, $sformatf("op %0d: hash command", o));
      if (o == 4) check(log_q[0].a_base == 11'(M2_PK) && log_q[0].b_base == 11'(M2_CTU) &&
                        log_q[0].idx0 == 8'd1 && log_q[0].idx1 == 8'd2, "H(pk) command fields");
      if (o == 5) check(log_q[0].a_base == log_q[0].b_base && log_q[0].idx0 == 8'd2 &&
                        log_q[0].idx1 == 8'd4, "G command fields");
      if (o == 6) check(log_q[0].a_base == 11'(M2_CTU) && log_q[0].b_base == 11'(M2_TMP) &&
                        log_q[0].idx0 == 8'd4 && log_q[0].idx1 == 8'd2, "H(c, z) command fields");
    end
    check(nsel_bad == 0, "seed selection wrong");
    check(ncollide == 0, "command started while engine busy");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule

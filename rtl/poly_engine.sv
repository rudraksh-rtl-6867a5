// Polynomial engine: the datapath of the paper's system figure without its
// top controller. It holds the ASCON-XOF core with its 76-bit buffer, the
// CBD and rejection samplers, the butterfly unit with its twiddle table and
// the two NTT banks M0/M1, and drives the ports of the M2 memory.
//
// The controller hands it one command (rudraksh_pkg::eng_cmd_t) at a time;
// each command is one pass over a 64-coefficient polynomial:
//
//   P_NTT / P_INTT  in-place transform of the polynomial in M0/M1, one
//                   butterfly per cycle, 32 per level, 6 levels; the pipeline
//                   is drained between levels (8 cycles) so that a level
//                   reads only finished results of the one before.
//   P_STREAM        one butterfly operation (cmd.mode/fsel) per coefficient
//                   k. The operands a, b, c are taken from M0/M1, from either
//                   read port of M2, from the message input, from zero or from
//                   the coefficient stream; the result goes to M0/M1, to M2
//                   or to the decoded-message register. The coefficient
//                   stream is chosen by cmd.ev:
//       EV_MEM  k = 0..63, one per cycle (copies, additions, compression,
//               point-wise multiply-accumulate from memory);
//       EV_CBD  the XOF absorbs seed_s and the nonce byte cmd.idx0 (three
//               64-bit blocks), squeezes four words, and each byte of them
//               gives two CBD coefficients, fed to the butterfly one per
//               cycle (e.g. a = 0, b = sample, ADD: a fresh secret; or
//               a = M0/M1: an error added to a polynomial);
//       EV_REJ  the XOF absorbs seed_a with the bytes cmd.idx0 (row) and
//               cmd.idx1 (column), squeezes until the rejection sampler has
//               64 coefficients of A-hat below q; each accepted coefficient k
//               is multiplied right away with coefficient k of M0/M1 and
//               accumulated into M2, so the matrix is never stored.
//
// The paper stores each generated A-hat polynomial and multiplies it in a
// separate 64-cycle point-wise pass; streaming the accepted coefficients
// straight into the multiply-accumulate is this design's simplification
// (it needs no storage for A-hat and hides the multiplication entirely
// behind the XOF).
//
// Timing: `start` with `cmd` while `busy` is low; `done` pulses when the
// pass has written its last result. Memory reads are issued in the cycle a
// coefficient becomes available, operands enter the butterfly one cycle
// later and results are written 6 cycles after that. `rej_drop` pulses for
// each candidate the rejection sampler discards.
module poly_engine
  import rudraksh_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  eng_cmd_t               cmd,
  output logic                   busy,
  output logic                   done,
  input  logic [127:0]           seed_a,
  input  logic [127:0]           seed_s,
  input  logic [127:0]           msg_in,
  output logic [127:0]           msg_out,
  output logic [1:0]             m2_re,
  output logic [1:0][M2_AW-1:0]  m2_raddr,
  input  coeff_t [1:0]           m2_rdata,
  output logic                   m2_we,
  output logic [M2_AW-1:0]       m2_waddr,
  output coeff_t                 m2_wdata,
  output logic                   rej_drop,
  input  logic [127:0]           hw0,
  input  logic [127:0]           hw1,
  input  logic [127:0]           hw2,
  output logic [255:0]           h_out,
  input  logic                   neq_clr,
  output logic                   cmp_neq
);

  typedef enum logic [2:0] { S_IDLE, S_STREAM, S_XFORM, S_LVLWAIT, S_HASH } state_e;
  typedef enum logic [1:0] { X_OFF, X_ABS, X_SQ } xstate_e;

  state_e   st;
  logic     xof_pass;
  xstate_e  xst;
  eng_cmd_t c;

  function automatic logic par6(input logic [5:0] x);
    return ^x;
  endfunction

  // ---------------------------------------------------------------- XOF side
  logic        x_init, x_absorb, x_last, x_squeeze, x_ovalid, x_busy;
  logic [63:0] x_blk, x_out;
  logic [5:0]  x_nbits;
  logic [1:0]  ab_cnt;
  logic [3:0]  sq_cnt;

  logic        b_clear, b_pop, b_push;
  logic [6:0]  b_pushw;
  logic [63:0] b_pushd;
  logic [6:0]  b_popw, b_cnt;
  logic [63:0] b_data;

  logic        r_clear, r_ovalid, r_full;
  coeff_t      r_coeff;
  logic [5:0]  r_idx;

  logic        cbd_in_v, cbd_ov;
  logic [1:0][QW-1:0] cbd_out;
  logic        pop_last;
  logic [5:0]  cbd_pops;
  logic        hold_v;
  coeff_t      hold_c;

  ascon_xof u_xof (
    .clk, .rst_n, .init(x_init), .absorb(x_absorb), .blk(x_blk), .last(x_last),
    .nbits(x_nbits), .squeeze(x_squeeze), .out(x_out), .out_valid(x_ovalid), .busy(x_busy)
  );

  xof_buffer #(.WIDTH(76)) u_buf (
    .clk, .rst_n, .clear(b_clear), .push(b_push), .push_w(b_pushw), .push_data(b_pushd),
    .pop(b_pop), .pop_w(b_popw), .data(b_data), .cnt(b_cnt)
  );

  rej_sampler u_rej (
    .clk, .rst_n, .clear(r_clear), .in_valid(b_pop && xof_pass && c.ev == EV_REJ),
    .in_data(b_data[QW-1:0]), .out_valid(r_ovalid), .out_coeff(r_coeff),
    .out_idx(r_idx), .full(r_full)
  );

  cbd_sampler #(.LANES(2)) u_cbd (
    .clk, .rst_n, .in_valid(cbd_in_v), .in_bits(b_data[7:0]),
    .out_valid(cbd_ov), .out_coeff(cbd_out)
  );

  assign xof_pass = (st == S_STREAM) && (c.ev != EV_MEM);

  // hash pass: prefix words, M2 coefficients [a_base, b_base), suffix word,
  // final padded absorb, squeezes
  typedef enum logic [2:0] { H_PRE, H_RD, H_PU, H_SUF, H_FIN, H_SQ } hph_e;
  hph_e        hph;
  logic [2:0]  hw_i;       // 64-bit words pushed in the current word phase
  logic [2:0]  hsq_i, hrx_i;
  logic [M2_AW-1:0] haddr;
  logic [6:0]  hcw;        // width of the coefficient read in H_RD
  logic        h_abs, h_fin;
  logic [255:0] hwords;

  assign hwords = {hw1, hw0};
  assign hcw    = (32'(haddr) < M2_CTU) ? 7'd13 : (32'(haddr) < M2_CTV) ? 7'd10 : 7'd5;
  assign h_abs  = (st == S_HASH) && (hph != H_SQ) && b_cnt >= 7'd64 && !x_busy;
  assign h_fin  = (st == S_HASH) && (hph == H_FIN) && b_cnt < 7'd64 && !x_busy;

  always_comb begin
    x_init    = 1'b0;
    x_absorb  = 1'b0;
    x_squeeze = 1'b0;
    x_blk     = '0;
    x_last    = 1'b0;
    x_nbits   = '0;
    if (start && !busy && ((cmd.op == P_STREAM && cmd.ev != EV_MEM) || cmd.op == P_HASH))
      x_init = 1'b1;
    if (h_abs || h_fin) begin
      x_absorb = 1'b1;
      x_blk    = b_data;
      x_last   = h_fin;
      x_nbits  = b_cnt[5:0];
    end
    if (st == S_HASH && hph == H_SQ && !x_busy && hsq_i < 3'(c.idx1)) x_squeeze = 1'b1;
    if (xst == X_ABS && !x_busy) begin
      x_absorb = 1'b1;
      unique case (ab_cnt)
        2'd0:    x_blk = (c.ev == EV_REJ) ? seed_a[63:0]   : seed_s[63:0];
        2'd1:    x_blk = (c.ev == EV_REJ) ? seed_a[127:64] : seed_s[127:64];
        default: begin
          x_last  = 1'b1;
          x_blk   = (c.ev == EV_REJ) ? {48'd0, c.idx1, c.idx0} : {56'd0, c.idx0};
          x_nbits = (c.ev == EV_REJ) ? 6'd16 : 6'd8;
        end
      endcase
    end
    if (xst == X_SQ && !x_busy && b_cnt <= 7'd12 &&
        ((c.ev == EV_CBD) ? (sq_cnt < 4'd4) : !r_full))
      x_squeeze = 1'b1;
  end

  // buffer pops feed the samplers
  always_comb begin
    b_pop    = 1'b0;
    b_popw   = 7'd13;
    cbd_in_v = 1'b0;
    b_push   = x_ovalid && (st != S_HASH);
    b_pushw  = 7'd64;
    b_pushd  = x_out;
    if (h_abs) begin
      b_pop  = 1'b1;
      b_popw = 7'd64;
    end
    if (h_fin) begin
      b_pop  = 1'b1;
      b_popw = b_cnt;
    end
    if (st == S_HASH) begin
      if (b_cnt <= 7'd12 && ((hph == H_PRE && hw_i != {c.idx0[1:0], 1'b0}) ||
                             (hph == H_SUF && hw_i != {1'b0, c.idx0[2], 1'b0}))) begin
        b_push  = 1'b1;
        b_pushd = (hph == H_PRE) ? hwords[64*hw_i +: 64] : hw2[64*hw_i[0] +: 64];
      end
      if (hph == H_PU) begin
        b_push  = 1'b1;
        b_pushw = hcw;
        b_pushd = 64'(m2_rdata[0]) & ((64'd1 << hcw) - 64'd1);
      end
    end
    if (xof_pass && c.ev == EV_REJ && b_cnt >= 7'd13 && !r_full) b_pop = 1'b1;
    if (xof_pass && c.ev == EV_CBD && b_cnt >= 7'd8 && !pop_last && cbd_pops < 6'd32) begin
      b_pop    = 1'b1;
      b_popw   = 7'd8;
      cbd_in_v = 1'b1;
    end
  end

  assign rej_drop = b_pop && xof_pass && (c.ev == EV_REJ) && !r_full && (32'(b_data[QW-1:0]) >= Q);
  assign b_clear  = start && !busy;
  assign r_clear  = start && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xst <= X_OFF; ab_cnt <= '0; sq_cnt <= '0;
      pop_last <= 1'b0; cbd_pops <= '0; hold_v <= 1'b0; hold_c <= '0;
    end else begin
      pop_last <= cbd_in_v;
      if (cbd_in_v) cbd_pops <= cbd_pops + 6'd1;
      hold_v <= cbd_ov;
      if (cbd_ov) hold_c <= cbd_out[1];
      if (x_absorb) ab_cnt <= ab_cnt + 2'd1;
      if (x_squeeze) sq_cnt <= sq_cnt + 4'd1;
      if (x_init && cmd.op == P_HASH) begin
        xst <= X_OFF;
      end else if (x_init) begin
        xst <= X_ABS; ab_cnt <= '0; sq_cnt <= '0; cbd_pops <= '0;
      end else if (xst == X_ABS && x_absorb && ab_cnt == 2'd2) begin
        xst <= X_SQ;
      end else if (done) begin
        xst <= X_OFF;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hph <= H_PRE; hw_i <= '0; hsq_i <= '0; hrx_i <= '0; haddr <= '0; h_out <= '0;
    end else begin
      if (start && !busy && cmd.op == P_HASH) begin
        hph   <= H_PRE;
        hw_i  <= '0;
        hsq_i <= '0;
        hrx_i <= '0;
        haddr <= cmd.a_base;
        h_out <= '0;
      end else if (st == S_HASH) begin
        if (x_squeeze) hsq_i <= hsq_i + 3'd1;
        if (x_ovalid) begin
          h_out[64*hrx_i[1:0] +: 64] <= x_out;
          hrx_i <= hrx_i + 3'd1;
        end
        unique case (hph)
          H_PRE: if (hw_i == {c.idx0[1:0], 1'b0}) begin
                   hw_i <= '0;
                   hph  <= H_RD;
                 end else if (b_push) hw_i <= hw_i + 3'd1;
          H_RD:  if (haddr == c.b_base) hph <= H_SUF;
                 else if (b_cnt <= 7'd63) hph <= H_PU;
          H_PU:  begin
                   haddr <= haddr + 1'b1;
                   hph   <= H_RD;
                 end
          H_SUF: if (hw_i == {1'b0, c.idx0[2], 1'b0}) hph <= H_FIN;
                 else if (b_push) hw_i <= hw_i + 3'd1;
          H_FIN: if (h_fin) hph <= H_SQ;
          default: ;
        endcase
      end
    end
  end

  // ---------------------------------------------------------------- events
  logic       ev_v;
  logic [5:0] ev_k;
  coeff_t     ev_val;
  logic [6:0] kcnt;      // events issued in this pass

  always_comb begin
    ev_v   = 1'b0;
    ev_k   = kcnt[5:0];
    ev_val = '0;
    if (st == S_STREAM && !kcnt[6]) begin
      unique case (c.ev)
        EV_MEM: ev_v = 1'b1;
        EV_CBD: begin
          ev_v   = cbd_ov || hold_v;
          ev_val = cbd_ov ? coeff_t'(cbd_out[0]) : hold_c;
        end
        default: begin
          ev_v   = r_ovalid;
          ev_k   = r_idx;
          ev_val = r_coeff;
        end
      endcase
    end
  end

  // ---------------------------------------------------------------- NTT addressing
  logic [2:0] lvl;
  logic [5:0] j;       // butterfly within level (bit 5 = level finished)
  logic [5:0] n_i0, n_i1, n_tw;
  logic       n_v;

  always_comb begin
    logic [4:0] g, off;
    n_v = (st == S_XFORM) && !j[5];
    if (c.op == P_NTT) begin
      // len = 32 >> lvl
      g    = 5'(j[4:0] >> (5 - lvl));
      off  = j[4:0] & 5'((32 >> lvl) - 1);
      n_i0 = 6'((32'(g) << (6 - lvl)) + 32'(off));
      n_i1 = 6'(32'(n_i0) + (32 >> lvl));
      n_tw = 6'((1 << lvl) + 32'(g));
    end else begin
      // len = 1 << lvl
      g    = 5'(j[4:0] >> lvl);
      off  = j[4:0] & 5'((1 << lvl) - 1);
      n_i0 = 6'((32'(g) << (lvl + 1)) + 32'(off));
      n_i1 = 6'(32'(n_i0) + (1 << lvl));
      n_tw = 6'((64 >> lvl) - 1 - 32'(g));
    end
  end

  // ---------------------------------------------------------------- memories
  logic [1:0]         m_re, m_we;
  logic [1:0][4:0]    m_raddr, m_waddr;
  coeff_t [1:0]       m_rdata, m_wdata;

  ntt_mem #(.DEPTH(32)) u_mem (
    .clk, .re(m_re), .raddr(m_raddr), .rdata(m_rdata), .we(m_we), .waddr(m_waddr), .wdata(m_wdata)
  );

  always_comb begin
    m_re     = '0;
    m_raddr  = '0;
    m2_re    = '0;
    m2_raddr = '0;
    if (st == S_HASH) begin
      m2_re[0]    = (hph == H_RD) && (haddr != c.b_base) && (b_cnt <= 7'd63);
      m2_raddr[0] = haddr;
    end else if (n_v) begin
      m_re = 2'b11;
      m_raddr[par6(n_i0)]  = n_i0[5:1];
      m_raddr[!par6(n_i0)] = n_i1[5:1];
    end else if (ev_v) begin
      m_re[par6(ev_k)]    = 1'b1;
      m_raddr[par6(ev_k)] = ev_k[5:1];
      m2_re               = 2'b11;
      m2_raddr[0]         = c.a_base + M2_AW'(ev_k);
      m2_raddr[1]         = (c.cmp ? c.d_base : c.b_base) + M2_AW'(ev_k);
    end
  end

  // ---------------------------------------------------------------- read stage
  logic       rd_v, rd_x, rd_sw;
  logic [5:0] rd_k, rd_i0, rd_i1;
  coeff_t     rd_val, rd_tw;
  coeff_t     tw;

  twiddle_rom u_tw (.addr(n_tw), .zeta(tw));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_v <= 1'b0; rd_x <= 1'b0; rd_sw <= 1'b0; rd_k <= '0; rd_i0 <= '0; rd_i1 <= '0;
      rd_val <= '0; rd_tw <= '0;
    end else begin
      rd_v   <= n_v || ev_v;
      rd_x   <= n_v;
      rd_sw  <= n_v ? par6(n_i0) : par6(ev_k);
      rd_k   <= ev_k;
      rd_i0  <= n_i0;
      rd_i1  <= n_i1;
      rd_val <= ev_val;
      rd_tw  <= tw;
    end
  end

  // ---------------------------------------------------------------- butterfly
  coeff_t          bf_a, bf_b, bf_c, bf_o0, bf_o1, m_val;
  bf_mode_e        bf_mode;
  logic [25:0]     bf_tag, bf_tago;
  logic            bf_vo;

  always_comb begin
    m_val   = m_rdata[rd_sw];
    bf_mode = rd_x ? ((c.op == P_NTT) ? BF_NTT : BF_INTT) : c.mode;
    bf_tag  = rd_x ? {13'd0, 1'b1, rd_i0, rd_i1} : {m2_rdata[1], 7'd0, rd_k};
    bf_a    = '0;
    bf_b    = '0;
    bf_c    = '0;
    if (rd_x) begin
      bf_a = m_rdata[rd_sw];
      bf_b = m_rdata[!rd_sw];
    end else begin
      unique case (c.asel)
        A_M:     bf_a = m_val;
        A_M2A:   bf_a = m2_rdata[0];
        A_MSG:   bf_a = coeff_t'(msg_in[2*rd_k +: 2]);
        A_XOF:   bf_a = rd_val;
        default: bf_a = '0;
      endcase
      unique case (c.bsel)
        B_M:     bf_b = m_val;
        B_M2B:   bf_b = m2_rdata[1];
        B_XOF:   bf_b = rd_val;
        default: bf_b = '0;
      endcase
      unique case (c.csel)
        C_M2A:   bf_c = m2_rdata[0];
        C_M2B:   bf_c = m2_rdata[1];
        default: bf_c = '0;
      endcase
    end
  end

  butterfly #(.TAGW(26)) u_bf (
    .clk, .rst_n, .v_in(rd_v), .mode(bf_mode), .fsel(c.fsel), .a(bf_a), .b(bf_b),
    .c(bf_c), .w(rd_tw), .tag(bf_tag), .v_out(bf_vo), .out0(bf_o0), .out1(bf_o1),
    .tag_out(bf_tago)
  );

  // ---------------------------------------------------------------- write back
  logic       wb_x;
  logic [5:0] wb_i0, wb_i1, wb_k;
  coeff_t     wb_old;
  assign wb_x  = bf_tago[12];
  assign wb_i0 = bf_tago[11:6];
  assign wb_i1 = bf_tago[5:0];
  assign wb_k  = bf_tago[5:0];
  assign wb_old = bf_tago[25:13];

  always_comb begin
    m_we     = '0;
    m_waddr  = '0;
    m_wdata  = '0;
    m2_we    = 1'b0;
    m2_waddr = c.d_base + M2_AW'(wb_k);
    m2_wdata = bf_o0;
    if (bf_vo) begin
      if (wb_x) begin
        m_we                = 2'b11;
        m_waddr[par6(wb_i0)]  = wb_i0[5:1];
        m_wdata[par6(wb_i0)]  = bf_o0;
        m_waddr[!par6(wb_i0)] = wb_i1[5:1];
        m_wdata[!par6(wb_i0)] = bf_o1;
      end else begin
        unique case (c.dsel)
          D_M: begin
            m_we[par6(wb_k)]    = 1'b1;
            m_waddr[par6(wb_k)] = wb_k[5:1];
            m_wdata[par6(wb_k)] = bf_o0;
          end
          D_M2:    m2_we = !c.cmp;
          default: ;
        endcase
      end
    end
  end

  // ciphertext comparison of a re-encryption (sticky until neq_clr)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cmp_neq <= 1'b0;
    else if (neq_clr) cmp_neq <= 1'b0;
    else if (bf_vo && !wb_x && c.cmp && c.dsel == D_M2 && bf_o0 != wb_old) cmp_neq <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) msg_out <= '0;
    else if (bf_vo && !wb_x && c.dsel == D_MSG) msg_out[2*wb_k +: 2] <= bf_o0[1:0];
  end

  // ---------------------------------------------------------------- pass control
  logic [3:0] inflight;
  logic       issue;
  assign issue = n_v || ev_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; kcnt <= '0; lvl <= '0; j <= '0; inflight <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      inflight <= inflight + 4'(issue) - 4'(bf_vo);
      unique case (st)
        S_IDLE: if (start) begin
          c    <= cmd;
          kcnt <= '0;
          lvl  <= '0;
          j    <= '0;
          st   <= (cmd.op == P_STREAM) ? S_STREAM : (cmd.op == P_HASH) ? S_HASH : S_XFORM;
        end
        S_STREAM: begin
          if (ev_v) kcnt <= kcnt + 7'd1;
          if (kcnt[6] && inflight == 4'd0 && !issue && !bf_vo && !x_busy) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        S_XFORM: begin
          j <= j + 6'd1;
          if (j == 6'd31) st <= S_LVLWAIT;
        end
        S_HASH: begin
          if (hph == H_SQ && hrx_i == 3'(c.idx1) && !x_busy) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        default: begin // S_LVLWAIT
          if (inflight == 4'd0 && !bf_vo) begin
            if (lvl == 3'd5) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end else begin
              lvl <= lvl + 3'd1;
              j   <= '0;
              st  <= S_XFORM;
            end
          end
        end
      endcase
    end
  end

  assign busy = (st != S_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("poly_engine: start while busy");
  assert property (@(posedge clk) disable iff (!rst_n) !(bf_vo && wb_x && st == S_STREAM))
    else $error("poly_engine: transform result during a stream pass");

endmodule

// Top controller: sequences the polynomial engine through the passes of
// the public-key encryption scheme (KeyGen, Enc, Dec) of KEM-poly64.
//
// Each operation is a short list of phases; a phase repeats a fixed list of
// engine commands `nloop` times (over a row or column index it) and each
// command waits for the engine's `done`. The command lists are:
//
//  KeyGen  phase 0, j = 0..8: s_j = CBD(seed_se, j) -> M; NTT(M);
//                   for i = 0..8: PK[i] (+)= A-hat[i][j] * M      (9 passes)
//          phase 1, i = 0..8: e_i = CBD(seed_se, 9+i) -> M; NTT(M);
//                   PK[i] = PK[i] + M
//  Enc     phase 0, j = 0..8: s'_j = CBD(r, j) -> M; NTT(M);
//                   for i = 0..8: U[i] (+)= A-hat[j][i] * M;  SUM (+)= PK[j] * M
//          phase 1, i = 0..8: M = U[i]; INTT(M); M += CBD(r, 9+i);
//                   U[i] = Compress_u(M)
//          phase 2: M = SUM; INTT(M); M += CBD(r, 18); TMP = Encode(m);
//                   M = M + TMP; V = Compress_v(M)
//  Dec     phase 0, i = 0..8: M = Decompress_u(U[i]); NTT(M); TMP = M;
//                   M = CBD(seed_se, i); NTT(M); SUM (+)= TMP * M
//          phase 1: M = SUM; INTT(M); TMP = Decompress_v(V); M = TMP - M;
//                   m' = Decode(M)
//
// The nonces (i for s_i, 9+i for e_i, 18 for e'') follow the paper's key
// generation and encryption algorithms; the order in which the loops visit
// the matrix (one secret polynomial at a time, accumulating all nine
// results in M2) and the regeneration of s from seed_se during Dec are
// choices of this design.
//
// Interface: pulse `start` with `op` while `busy` is low; `done` pulses at
// the end. The engine handshake is start/cmd -> done.
module rudraksh_ctrl
  import rudraksh_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [2:0]  op,        // 0 KeyGen, 1 Enc, 2 Dec, 3 Enc-compare, 4 H(pk), 5 G, 6 H(c)
  output logic        busy,
  output logic        done,
  output logic        sel_r,     // engine CBD seed: 0 seed_se, 1 r
  output logic        e_start,
  output eng_cmd_t    e_cmd,
  input  logic        e_busy,
  input  logic        e_done
);

  localparam logic [2:0] OP_KEYGEN = 3'd0, OP_ENC = 3'd1, OP_DEC = 3'd2, OP_ENCCMP = 3'd3,
                         OP_HPK = 3'd4, OP_G = 3'd5, OP_HC = 3'd6;

  typedef enum logic [1:0] { C_IDLE, C_ISSUE, C_WAIT } cst_e;

  cst_e       st;
  logic [2:0] cop;
  logic       cmpm;
  logic [1:0] ph;
  logic [3:0] it, s;

  localparam logic [10:0] A_PK  = 11'(M2_PK);
  localparam logic [10:0] A_CTU = 11'(M2_CTU);
  localparam logic [10:0] A_CTV = 11'(M2_CTV);
  localparam logic [10:0] A_TMP = 11'(M2_TMP);
  localparam logic [10:0] A_SUM = 11'(M2_SUM);
  localparam logic [10:0] A_ACC = 11'(M2_ACC);

  // XOF over prefix words, M2[lo, hi) and an optional suffix word
  function automatic eng_cmd_t hash(input logic [10:0] lo, input logic [10:0] hi,
                                    input logic [1:0] npre, input logic suf, input logic [2:0] nsq);
    eng_cmd_t x;
    x        = '0;
    x.op     = P_HASH;
    x.ev     = EV_MEM;
    x.a_base = lo;
    x.b_base = hi;
    x.idx0   = {5'd0, suf, npre};
    x.idx1   = {5'd0, nsq};
    return x;
  endfunction

  function automatic logic [10:0] poly(input logic [10:0] base, input logic [3:0] k);
    return base + {1'b0, k, 6'd0};
  endfunction

  function automatic eng_cmd_t mk(input pass_e o, input ev_e e, input bf_mode_e m);
    eng_cmd_t x;
    x      = '0;
    x.op   = o;
    x.ev   = e;
    x.mode = m;
    x.asel = A_ZERO;
    x.bsel = B_ZERO;
    x.csel = C_ZERO;
    x.dsel = D_M;
    return x;
  endfunction

  // fresh sample into M0/M1: M = 0 + CBD
  function automatic eng_cmd_t cbd_new(input logic [7:0] nonce);
    eng_cmd_t x;
    x      = mk(P_STREAM, EV_CBD, BF_ADD);
    x.bsel = B_XOF;
    x.idx0 = nonce;
    return x;
  endfunction

  function automatic eng_cmd_t cbd_add(input logic [7:0] nonce);
    eng_cmd_t x;
    x      = cbd_new(nonce);
    x.asel = A_M;
    return x;
  endfunction

  // M2[dst] (+)= A-hat[row][col] * M
  function automatic eng_cmd_t gena(input logic [3:0] row, input logic [3:0] col,
                                    input logic [10:0] dst, input logic first);
    eng_cmd_t x;
    x        = mk(P_STREAM, EV_REJ, BF_MAC);
    x.asel   = A_XOF;
    x.bsel   = B_M;
    x.csel   = first ? C_ZERO : C_M2A;
    x.a_base = dst;
    x.d_base = dst;
    x.dsel   = D_M2;
    x.idx0   = 8'(row);
    x.idx1   = 8'(col);
    return x;
  endfunction

  // M = M2[src]
  function automatic eng_cmd_t load_m(input logic [10:0] src);
    eng_cmd_t x;
    x        = mk(P_STREAM, EV_MEM, BF_ADD);
    x.asel   = A_M2A;
    x.a_base = src;
    return x;
  endfunction

  // M2[dst] = f(M)
  function automatic eng_cmd_t store_m(input bf_mode_e m, input fsel_e f, input logic [10:0] dst);
    eng_cmd_t x;
    x        = mk(P_STREAM, EV_MEM, m);
    x.fsel   = f;
    x.asel   = A_M;
    x.dsel   = D_M2;
    x.d_base = dst;
    return x;
  endfunction

  // M2[acc] (+)= M2[src] * M
  function automatic eng_cmd_t mac_m(input logic [10:0] src, input logic [10:0] acc,
                                     input logic first);
    eng_cmd_t x;
    x        = mk(P_STREAM, EV_MEM, BF_MAC);
    x.asel   = A_M2A;
    x.a_base = src;
    x.bsel   = B_M;
    x.csel   = first ? C_ZERO : C_M2B;
    x.b_base = acc;
    x.dsel   = D_M2;
    x.d_base = acc;
    return x;
  endfunction

  eng_cmd_t cur;
  logic [3:0] nsteps, nloop;
  logic       last_ph;

  always_comb begin
    eng_cmd_t x;
    x       = mk(P_NTT, EV_MEM, BF_NTT);
    nsteps  = 4'd1;
    nloop   = 4'd1;
    last_ph = 1'b1;
    unique case (cop)
      OP_KEYGEN: begin
        nloop = 4'(L);
        if (ph == 2'd0) begin
          nsteps  = 4'd11;
          last_ph = 1'b0;
          if (s == 4'd0)      x = cbd_new(8'(it));
          else if (s == 4'd1) x = mk(P_NTT, EV_MEM, BF_NTT);
          else                x = gena(s - 4'd2, it, poly(A_PK, s - 4'd2), it == 4'd0);
        end else begin
          nsteps = 4'd3;
          if (s == 4'd0)      x = cbd_new(8'(L) + 8'(it));
          else if (s == 4'd1) x = mk(P_NTT, EV_MEM, BF_NTT);
          else begin
            x        = load_m(poly(A_PK, it));
            x.bsel   = B_M;
            x.dsel   = D_M2;
            x.d_base = poly(A_PK, it);
          end
        end
      end
      OP_HPK: x = hash(A_PK, A_CTU, 2'd1, 1'b0, 3'd2);
      OP_G:   x = hash(A_PK, A_PK, 2'd2, 1'b0, 3'd4);
      OP_HC:  x = hash(A_CTU, A_TMP, 2'd0, 1'b1, 3'd2);
      OP_ENC, OP_ENCCMP: begin
        if (ph == 2'd0) begin
          nloop   = 4'(L);
          nsteps  = 4'd12;
          last_ph = 1'b0;
          if (s == 4'd0)       x = cbd_new(8'(it));
          else if (s == 4'd1)  x = mk(P_NTT, EV_MEM, BF_NTT);
          else if (s == 4'd11) x = mac_m(poly(A_PK, it), A_SUM, it == 4'd0);
          else                 x = gena(it, s - 4'd2, poly(A_ACC, s - 4'd2), it == 4'd0);
        end else if (ph == 2'd1) begin
          nloop   = 4'(L);
          nsteps  = 4'd4;
          last_ph = 1'b0;
          unique case (s)
            4'd0:    x = load_m(poly(A_ACC, it));
            4'd1:    x = mk(P_INTT, EV_MEM, BF_INTT);
            4'd2:    x = cbd_add(8'(L) + 8'(it));
            default: begin
              x     = store_m(BF_COMP, FS_U, poly(A_CTU, it));
              x.cmp = cmpm;
            end
          endcase
        end else begin
          nsteps = 4'd6;
          unique case (s)
            4'd0: x = load_m(A_SUM);
            4'd1: x = mk(P_INTT, EV_MEM, BF_INTT);
            4'd2: x = cbd_add(8'(2*L));
            4'd3: begin
              x      = store_m(BF_DECOMP, FS_MSG, A_TMP);
              x.asel = A_MSG;
            end
            4'd4: begin
              x        = mk(P_STREAM, EV_MEM, BF_ADD);
              x.asel   = A_M;
              x.bsel   = B_M2B;
              x.b_base = A_TMP;
            end
            default: begin
              x     = store_m(BF_COMP, FS_V, A_CTV);
              x.cmp = cmpm;
            end
          endcase
        end
      end
      default: begin // OP_DEC
        if (ph == 2'd0) begin
          nloop   = 4'(L);
          nsteps  = 4'd6;
          last_ph = 1'b0;
          unique case (s)
            4'd0: begin
              x      = load_m(poly(A_CTU, it));
              x.mode = BF_DECOMP;
              x.fsel = FS_U;
            end
            4'd1:    x = mk(P_NTT, EV_MEM, BF_NTT);
            4'd2:    x = store_m(BF_ADD, FS_U, A_TMP);
            4'd3:    x = cbd_new(8'(it));
            4'd4:    x = mk(P_NTT, EV_MEM, BF_NTT);
            default: x = mac_m(A_TMP, A_SUM, it == 4'd0);
          endcase
        end else begin
          nsteps = 4'd5;
          unique case (s)
            4'd0: x = load_m(A_SUM);
            4'd1: x = mk(P_INTT, EV_MEM, BF_INTT);
            4'd2: begin
              x        = load_m(A_CTV);
              x.mode   = BF_DECOMP;
              x.fsel   = FS_V;
              x.dsel   = D_M2;
              x.d_base = A_TMP;
            end
            4'd3: begin
              x        = load_m(A_TMP);
              x.mode   = BF_SUB;
              x.bsel   = B_M;
            end
            default: begin
              x      = store_m(BF_COMP, FS_MSG, A_PK);
              x.dsel = D_MSG;
            end
          endcase
        end
      end
    endcase
    if (x.op != P_STREAM) x.ev = EV_MEM;
    if (x.op == P_INTT)   x.mode = BF_INTT;
    cur = x;
  end

  assign e_cmd   = cur;
  assign e_start = (st == C_ISSUE) && !e_busy;
  assign busy    = (st != C_IDLE);
  assign sel_r   = (cop == OP_ENC) || (cop == OP_ENCCMP);
  assign cmpm    = (cop == OP_ENCCMP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; cop <= '0; ph <= '0; it <= '0; s <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin
          cop <= op; ph <= '0; it <= '0; s <= '0;
          st  <= C_ISSUE;
        end
        C_ISSUE: if (!e_busy) st <= C_WAIT;
        default: if (e_done) begin
          st <= C_ISSUE;
          if (s == nsteps - 4'd1) begin
            s <= '0;
            if (it == nloop - 4'd1) begin
              it <= '0;
              if (last_ph) begin
                st   <= C_IDLE;
                done <= 1'b1;
              end else begin
                ph <= ph + 2'd1;
              end
            end else begin
              it <= it + 4'd1;
            end
          end else begin
            s <= s + 4'd1;
          end
        end
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("rudraksh_ctrl: start while busy");
  assert property (@(posedge clk) disable iff (!rst_n) start |-> op != 3'd7)
    else $error("rudraksh_ctrl: unknown operation");

endmodule

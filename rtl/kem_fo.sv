// Fujisaki-Okamoto layer: turns the PKE core into the KEM (KEM.KeyGen,
// KEM.Encaps, KEM.Decaps of the paper's KEM figure) by sequencing PKE
// operations and three XOF hash passes of the engine:
//
//   H(pk)   = XOF(seed_a || b-hat coefficients, 13 bits each)  -> 128 bits
//   G(h, m) = XOF(h || m)                                       -> K || r
//   H(c, z) = XOF(u (10-bit) || v (5-bit) || z)                 -> 128 bits
//
//   KEM KeyGen : PKE.KeyGen; pkh = H(pk)
//   Encaps(msg): pkh = H(pk); (K, r) = G(pkh, msg); c = PKE.Enc(msg; r); key = K
//   Decaps     : m' = PKE.Dec(c); K'' = H(c, z); pkh = H(pk);
//                (K', r') = G(pkh, m'); c* = PKE.Enc(m'; r') compared on the
//                fly with the c in M2; key = (c == c*) ? K' : K''
//
// With n = 64 and B = 2 the 128-bit message maps one to one onto the
// message polynomial, so Arrange_msg and Original_msg are the identity on
// the bit vector (coefficient k = bits 2k+1:2k). The hash constructions
// follow the paper's KEM figure; the serialisation of pk and c into the
// XOF (coefficients packed LSB-first at their stored widths, seed first,
// z last), the use of one XOF call with a 256-bit output for G, and the
// recomputation of H(pk) during Encaps/Decaps (instead of keeping pkh in
// the secret key) are this design's choices.
//
// Operations (`kop`): 0 PKE KeyGen, 1 PKE Enc (r = seed_r), 2 PKE Dec,
// 3 KEM KeyGen, 4 Encaps, 5 Decaps. Pulse `start` while `busy` is low;
// `done` pulses at the end; `key`, `pkh` and `msg_e` then hold the results.
// Each step starts rudraksh_ctrl with one operation and waits for its done.
module kem_fo
  import rudraksh_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [2:0]    kop,
  output logic          busy,
  output logic          done,
  input  logic [127:0]  seed_a,
  input  logic [127:0]  seed_r,
  input  logic [127:0]  z,
  input  logic [127:0]  msg,
  output logic [127:0]  key,
  output logic [127:0]  pkh,
  output logic          reject,   // Decaps: re-encryption differed from c
  // to the controller and engine
  output logic          c_start,
  output logic [2:0]    c_op,
  input  logic          c_busy,
  input  logic          c_done,
  output logic [127:0]  r_e,      // randomness used by Enc
  output logic [127:0]  msg_e,    // message used by Enc / decrypted message
  input  logic [127:0]  msg_dec,  // engine's decoded message
  output logic [127:0]  hw0,
  output logic [127:0]  hw1,
  output logic [127:0]  hw2,
  input  logic [255:0]  h_out,
  output logic          neq_clr,
  input  logic          cmp_neq
);

  localparam logic [2:0] C_KEYGEN = 3'd0, C_ENC = 3'd1, C_DEC = 3'd2, C_ENCCMP = 3'd3,
                         C_HPK = 3'd4, C_G = 3'd5, C_HC = 3'd6;

  typedef enum logic [1:0] { F_IDLE, F_ISSUE, F_WAIT } fst_e;

  fst_e        st;
  logic [2:0]  op_q, step, nsteps;
  logic [127:0] kbar, kk;

  // step table: controller operation of step `step` of operation op_q
  always_comb begin
    c_op   = C_KEYGEN;
    nsteps = 3'd1;
    unique case (op_q)
      3'd0: c_op = C_KEYGEN;
      3'd1: c_op = C_ENC;
      3'd2: c_op = C_DEC;
      3'd3: begin
        nsteps = 3'd2;
        c_op   = (step == 3'd0) ? C_KEYGEN : C_HPK;
      end
      3'd4: begin
        nsteps = 3'd3;
        c_op   = (step == 3'd0) ? C_HPK : (step == 3'd1) ? C_G : C_ENC;
      end
      default: begin
        nsteps = 3'd5;
        unique case (step)
          3'd0:    c_op = C_DEC;
          3'd1:    c_op = C_HC;
          3'd2:    c_op = C_HPK;
          3'd3:    c_op = C_G;
          default: c_op = C_ENCCMP;
        endcase
      end
    endcase
  end

  assign hw0     = (c_op == C_HPK) ? seed_a : pkh;
  assign hw1     = msg_e;
  assign hw2     = z;
  assign c_start = (st == F_ISSUE) && !c_busy;
  assign neq_clr = c_start && (c_op == C_ENCCMP);
  assign busy    = (st != F_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= F_IDLE; op_q <= '0; step <= '0; done <= 1'b0;
      key <= '0; pkh <= '0; kbar <= '0; kk <= '0; r_e <= '0; msg_e <= '0; reject <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        F_IDLE: if (start) begin
          op_q  <= kop;
          step  <= '0;
          msg_e <= msg;
          r_e   <= seed_r;
          st    <= F_ISSUE;
        end
        F_ISSUE: if (!c_busy) st <= F_WAIT;
        default: if (c_done) begin
          unique case (c_op)
            C_DEC:  msg_e <= msg_dec;
            C_HPK:  pkh   <= h_out[127:0];
            C_HC:   kbar  <= h_out[127:0];
            C_G: begin
              kk  <= h_out[127:0];
              r_e <= h_out[255:128];
            end
            default: ;
          endcase
          if (step == nsteps - 3'd1) begin
            st   <= F_IDLE;
            done <= 1'b1;
            if (op_q == 3'd4) key <= kk;
            if (op_q == 3'd5) begin
              key    <= cmp_neq ? kbar : kk;
              reject <= cmp_neq;
            end
          end else begin
            step <= step + 3'd1;
            st   <= F_ISSUE;
          end
        end
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("kem_fo: start while busy");
  assert property (@(posedge clk) disable iff (!rst_n) start |-> kop <= 3'd5)
    else $error("kem_fo: unknown operation");

endmodule

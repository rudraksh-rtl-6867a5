// Rudraksh KEM-poly64 accelerator: PKE core plus the Fujisaki-Okamoto KEM
// layer.
//
// Connects kem_fo (KEM sequencing), the top controller (rudraksh_ctrl), the
// polynomial engine (poly_engine: ASCON-XOF, 76-bit buffer, samplers,
// butterfly, twiddle table, NTT memories M0/M1) and the memory M2 (pk_mem),
// as in the paper's system figure. M2 holds the public key b-hat (9
// polynomials, NTT domain), the ciphertext u (10-bit) and v (5-bit), two
// scratch polynomials and the re-encryption accumulators; see rudraksh_pkg.
//
// Operations (`op` with a `start` pulse while `busy` is low, `done` at the
// end): 0 PKE KeyGen, 1 PKE Enc (r = seed_r), 2 PKE Dec (msg_out),
// 3 KEM KeyGen (also pkh), 4 Encaps(msg) -> c in M2, key,
// 5 Decaps(c in M2, z) -> key, reject. The message is 2 bits per
// coefficient, coefficient k in bits 2k+1:2k.
// While the core is idle the host reads and writes M2 word by word through
// the h_* port (read data one cycle after h_re), to take out the public key
// and ciphertext or to load those of another party.
//
// The paper's TRNG is outside this core: seeds, msg and z are inputs.
// `rej_drop` pulses once for every rejected sample of A-hat.
module rudraksh_top
  import rudraksh_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [2:0]        op,
  output logic              busy,
  output logic              done,
  input  logic [127:0]      seed_a,
  input  logic [127:0]      seed_se,
  input  logic [127:0]      seed_r,
  input  logic [127:0]      msg,
  input  logic [127:0]      z,
  output logic [127:0]      msg_out,
  output logic [127:0]      key,
  output logic [127:0]      pkh,
  output logic              reject,
  input  logic              h_re,
  input  logic              h_we,
  input  logic [M2_AW-1:0]  h_addr,
  input  coeff_t            h_wdata,
  output coeff_t            h_rdata,
  output logic              rej_drop
);

  logic      sel_r, e_start, e_busy, e_done;
  eng_cmd_t  e_cmd;
  logic      c_start, c_busy, c_done, neq_clr, cmp_neq;
  logic [2:0] c_op;
  logic [127:0] r_e, msg_e, hw0, hw1, hw2;
  logic [255:0] h_out;

  kem_fo u_fo (
    .clk, .rst_n, .start, .kop(op), .busy, .done, .seed_a, .seed_r, .z, .msg,
    .key, .pkh, .reject, .c_start, .c_op, .c_busy, .c_done, .r_e, .msg_e,
    .msg_dec(msg_out), .hw0, .hw1, .hw2, .h_out, .neq_clr, .cmp_neq
  );

  logic [1:0]             e_re, m_re;
  logic [1:0][M2_AW-1:0]  e_raddr, m_raddr;
  coeff_t [1:0]           m_rdata;
  logic                   e_we, m_we;
  logic [M2_AW-1:0]       e_waddr, m_waddr;
  coeff_t                 e_wdata, m_wdata;

  rudraksh_ctrl u_ctrl (
    .clk, .rst_n, .start(c_start), .op(c_op), .busy(c_busy), .done(c_done), .sel_r,
    .e_start, .e_cmd, .e_busy, .e_done
  );

  poly_engine u_eng (
    .clk, .rst_n, .start(e_start), .cmd(e_cmd), .busy(e_busy), .done(e_done),
    .seed_a, .seed_s(sel_r ? r_e : seed_se), .msg_in(msg_e), .msg_out,
    .m2_re(e_re), .m2_raddr(e_raddr), .m2_rdata(m_rdata),
    .m2_we(e_we), .m2_waddr(e_waddr), .m2_wdata(e_wdata), .rej_drop,
    .hw0, .hw1, .hw2, .h_out, .neq_clr, .cmp_neq
  );

  always_comb begin
    m_re    = e_re;
    m_raddr = e_raddr;
    m_we    = e_we;
    m_waddr = e_waddr;
    m_wdata = e_wdata;
    if (!busy) begin
      m_re       = {1'b0, h_re};
      m_raddr[0] = h_addr;
      m_we       = h_we;
      m_waddr    = h_addr;
      m_wdata    = h_wdata;
    end
  end

  pk_mem #(.DEPTH(M2_DEPTH), .AW(M2_AW)) u_m2 (
    .clk, .re(m_re), .raddr(m_raddr), .rdata(m_rdata),
    .we(m_we), .waddr(m_waddr), .wdata(m_wdata)
  );

  assign h_rdata = m_rdata[0];

  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !(h_re || h_we))
    else $error("rudraksh_top: host access while busy");

endmodule

// Shared constants and types of the Rudraksh (KEM-poly64) datapath.
//
// The scheme parameters follow the KEM-poly64 row of the parameter table:
// module rank L = 9, polynomial size N = 64, prime Q = 7681 (13-bit
// coefficients), u compressed to 10 bits, v to 5 bits (log t = 3 plus B = 2
// message bits per coefficient), CBD parameter eta = 2.
//
// The butterfly mode encoding, the M2 memory map and the twiddle-factor
// generator are choices of this design; the text only says the butterfly has
// a 3-bit mode and that M2 holds the public key and the run-time lattice data.
package rudraksh_pkg;

  localparam int unsigned Q       = 7681;
  localparam int unsigned N       = 64;
  localparam int unsigned L       = 9;
  localparam int unsigned QW      = 13;   // ceil(log2 Q)
  localparam int unsigned LOGN    = 6;
  localparam int unsigned DU      = 10;   // log2 p
  localparam int unsigned DV      = 5;    // log2 t + B
  localparam int unsigned B_MSG   = 2;    // message bits per coefficient
  localparam int unsigned ZETA    = 202;  // primitive 128th root of unity mod Q
  localparam int unsigned HALF_Q  = 3840; // floor(Q/2), rounding term of compress/decode

  typedef logic [QW-1:0] coeff_t;

  // 3-bit butterfly mode
  typedef enum logic [2:0] {
    BF_NTT    = 3'd0,  // (a,b,w) -> a + w*b , a - w*b
    BF_INTT   = 3'd1,  // (a,b,w) -> (a+b)/2 , w*(b-a)/2
    BF_MAC    = 3'd2,  // (a,b,c) -> a*b + c
    BF_ADD    = 3'd3,  // (a,b)   -> a + b
    BF_SUB    = 3'd4,  // (a,b)   -> a - b
    BF_COMP   = 3'd5,  // compress / decode of a, variant in fsel
    BF_DECOMP = 3'd6   // decompress / encode of a, variant in fsel
  } bf_mode_e;

  // variant of the compress / decompress modes
  typedef enum logic [1:0] {
    FS_U   = 2'd0,  // 10-bit: compress(x,1024) / decompress(u,1024)
    FS_V   = 2'd1,  // 5-bit : compress(x,32)   / decompress(v,32)
    FS_MSG = 2'd2   // 2-bit : Decode(x)        / Encode(m)
  } fsel_e;

  // ---- poly engine commands
  typedef enum logic [1:0] {
    P_STREAM = 2'd0,  // one butterfly operation per coefficient k = 0..63
    P_NTT    = 2'd1,  // forward NTT of the polynomial in M0/M1
    P_INTT   = 2'd2,  // inverse NTT of the polynomial in M0/M1
    P_HASH   = 2'd3   // XOF over 128-bit words and M2 coefficients
  } pass_e;

  // where the coefficients of a stream pass come from
  typedef enum logic [1:0] {
    EV_MEM = 2'd0,    // memories, one coefficient per cycle
    EV_CBD = 2'd1,    // XOF -> CBD sampler (seed_s, nonce)
    EV_REJ = 2'd2     // XOF -> rejection sampler (seed_a, row, column)
  } ev_e;

  typedef enum logic [2:0] { A_M, A_M2A, A_ZERO, A_MSG, A_XOF } asel_e;
  typedef enum logic [1:0] { B_M, B_M2B, B_ZERO, B_XOF } bsel_e;
  typedef enum logic [1:0] { C_ZERO, C_M2A, C_M2B } csel_e;
  typedef enum logic [1:0] { D_M, D_M2, D_MSG } dsel_e;

  typedef struct packed {
    pass_e       op;
    ev_e         ev;
    bf_mode_e    mode;
    fsel_e       fsel;
    asel_e       asel;
    bsel_e       bsel;
    csel_e       csel;
    dsel_e       dsel;
    logic [10:0] a_base;   // M2 read port 0 base address
    logic [10:0] b_base;   // M2 read port 1 base address
    logic [10:0] d_base;   // M2 write base address
    logic [7:0]  idx0;     // CBD nonce, or A-hat row; P_HASH: [1:0] prefix words, [2] suffix word
    logic [7:0]  idx1;     // A-hat column; P_HASH: squeezed 64-bit words (1..4)
    logic        cmp;      // compare results with M2[d_base+k] instead of writing them
  } eng_cmd_t;

  // M2 memory map (13-bit words)
  localparam int unsigned M2_PK    = 0;            // b-hat, L polynomials
  localparam int unsigned M2_CTU   = L*N;          // u (10-bit coefficients)
  localparam int unsigned M2_CTV   = 2*L*N;        // v
  localparam int unsigned M2_TMP   = 2*L*N + N;    // scratch polynomial
  localparam int unsigned M2_SUM   = 2*L*N + 2*N;  // c_m / decryption accumulator
  localparam int unsigned M2_ACC   = 2*L*N + 3*N;  // b-hat' accumulators during Enc
  localparam int unsigned M2_DEPTH = 3*L*N + 3*N;  // 1920 words
  localparam int unsigned M2_AW    = 11;

  // bit reversal of a 6-bit index
  function automatic logic [5:0] brv6(input logic [5:0] x);
    for (int i = 0; i < 6; i++) brv6[i] = x[5-i];
  endfunction

  function automatic int unsigned powmod(input int unsigned b, input int unsigned e);
    int unsigned r, x;
    r = 1; x = b % Q;
    for (int i = 0; i < 8; i++) begin
      if (e[i]) r = (r * x) % Q;
      x = (x * x) % Q;
    end
    return r;
  endfunction

  // twiddle factor zeta^brv6(k), k = 0..63
  function automatic coeff_t zeta_brv(input int unsigned k);
    return coeff_t'(powmod(ZETA, int'(brv6(6'(k)))));
  endfunction

  // ASCON-XOF state after p^12 of IV || 0 (IV = 0x00400c0000000000)
  localparam logic [319:0] XOF_INIT = {64'hb57e273b814cd416, 64'h2b51042562ae2420,
                                       64'h66a3a7768ddf2218, 64'h5aad0a7a8153650c,
                                       64'h4f3e0e32539493b6};

endpackage

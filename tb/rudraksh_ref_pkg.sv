// Reference models used by the testbenches: the ASCON permutation and sponge,
// modular arithmetic mod 7681, and negacyclic schoolbook multiplication. They
// are written from the algorithm definitions, independently of the RTL.
package rudraksh_ref_pkg;
  localparam int RQ = 7681;

  function automatic logic [63:0] rr(logic [63:0] x, int n); return (x >> n) | (x << (64-n)); endfunction

  function automatic logic [319:0] ref_p12(logic [319:0] st);
    logic [63:0] s[5], t[5];
    for (int k = 0; k < 5; k++) s[k] = st[319-64*k -: 64];
    for (int i = 0; i < 12; i++) begin
      s[2] ^= 64'(((15 - i) << 4) | i);
      s[0] ^= s[4]; s[4] ^= s[3]; s[2] ^= s[1];
      for (int k = 0; k < 5; k++) t[k] = ~s[k] & s[(k+1)%5];
      for (int k = 0; k < 5; k++) s[k] ^= t[(k+1)%5];
      s[1] ^= s[0]; s[0] ^= s[4]; s[3] ^= s[2]; s[2] = ~s[2];
      s[0] ^= rr(s[0],19) ^ rr(s[0],28); s[1] ^= rr(s[1],61) ^ rr(s[1],39);
      s[2] ^= rr(s[2],1) ^ rr(s[2],6);   s[3] ^= rr(s[3],10) ^ rr(s[3],17);
      s[4] ^= rr(s[4],7) ^ rr(s[4],41);
    end
    return {s[0], s[1], s[2], s[3], s[4]};
  endfunction

  // Sponge over a bit string given LSB-first in 64-bit words: `nbits` bits of
  // `msg`, padded with a single 1; `nout` output words written to `out`.
  function automatic void ref_xof(input logic [63:0] msg[], input int nbits,
                                  input int nout, output logic [63:0] out[]);
    logic [319:0] s;
    int nblk;
    logic [63:0] b;
    s = ref_p12({64'h00400c0000000000, 256'd0});
    nblk = (nbits + 1 + 63) / 64;
    for (int i = 0; i < nblk; i++) begin
      b = (i < msg.size()) ? msg[i] : 64'd0;
      if (i == nblk - 1) begin
        int r = nbits - 64*i;
        b = (b & ((64'd1 << r) - 1)) | (64'd1 << r);
      end
      s[319:256] ^= b;
      s = ref_p12(s);
    end
    out = new[nout];
    for (int i = 0; i < nout; i++) begin
      out[i] = s[319:256];
      s = ref_p12(s);
    end
  endfunction

  function automatic int modq(longint x); longint r = x % RQ; if (r < 0) r += RQ; return int'(r); endfunction

  function automatic int powq(int b, int e);
    longint r = 1;
    for (int i = 0; i < e; i++) r = (r * b) % RQ;
    return int'(r);
  endfunction

  // c = a*b in Z_q[x]/(x^64+1)
  function automatic void ref_polymul(input int a[64], input int b[64], output int c[64]);
    longint acc[64];
    for (int i = 0; i < 64; i++) acc[i] = 0;
    for (int i = 0; i < 64; i++)
      for (int j = 0; j < 64; j++)
        if (i + j < 64) acc[i+j] += longint'(a[i]) * b[j];
        else            acc[i+j-64] -= longint'(a[i]) * b[j];
    for (int i = 0; i < 64; i++) c[i] = modq(acc[i]);
  endfunction
endpackage

// Twiddle-factor table: zeta^brv6(k) mod q for k = 0..63, where zeta = 202
// is a primitive 128th root of unity mod 7681 and brv6 reverses the 6 index
// bits. Entry k is the factor of the k-th butterfly group of the
// Cooley-Tukey NTT (k = 1..63, level by level), and the Gentleman-Sande INTT
// walks the table backwards. The paper stores a polynomial's worth of
// pre-computed powers of zeta; which root is used is not stated, so the
// smallest primitive 128th root is this design's choice. The table is
// computed at elaboration by a constant function, so no data file is read.
//
// Timing: combinational read.
module twiddle_rom
  import rudraksh_pkg::*;
(
  input  logic [5:0] addr,
  output coeff_t     zeta
);

  function automatic logic [64*QW-1:0] build();
    logic [64*QW-1:0] t;
    for (int k = 0; k < 64; k++) t[k*QW +: QW] = zeta_brv(k);
    return t;
  endfunction

  localparam logic [64*QW-1:0] TABLE = build();

  assign zeta = TABLE[addr*QW +: QW];

endmodule

// NTT memory: two banks M0 and M1 of DEPTH x 13 bits (32 words each for one
// 64-coefficient polynomial), each with one synchronous read port and one
// write port, as the two BRAMs of the paper.
//
// Coefficient i lives in bank parity(i) (XOR of its six index bits) at word
// i >> 1. The two inputs of every radix-2 butterfly (indices that differ in
// one bit) therefore always sit in different banks, and so do its two
// outputs, so one butterfly can be read and one written every cycle without
// moving data between levels. The paper reaches the same goal by writing
// the first half of the secret to M0 and the second half to M1 and swapping
// banks from level to level; the parity mapping is this design's variant.
//
// Timing: `rdata` is valid the cycle after `re`; writes take effect at the
// clock edge.
module ntt_mem
  import rudraksh_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic                           clk,
  input  logic [1:0]                     re,
  input  logic [1:0][$clog2(DEPTH)-1:0]  raddr,
  output coeff_t [1:0]                   rdata,
  input  logic [1:0]                     we,
  input  logic [1:0][$clog2(DEPTH)-1:0]  waddr,
  input  coeff_t [1:0]                   wdata
);

  coeff_t m0 [DEPTH];
  coeff_t m1 [DEPTH];

  always_ff @(posedge clk) begin
    if (we[0]) m0[waddr[0]] <= wdata[0];
    if (re[0]) rdata[0] <= m0[raddr[0]];
  end

  always_ff @(posedge clk) begin
    if (we[1]) m1[waddr[1]] <= wdata[1];
    if (re[1]) rdata[1] <= m1[raddr[1]];
  end

endmodule

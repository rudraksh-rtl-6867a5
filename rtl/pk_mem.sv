// Memory M2: the public key b-hat, the b-hat' accumulators that become the
// ciphertext u, the ciphertext v, a scratch polynomial and an accumulator
// polynomial (layout in rudraksh_pkg, 1344 words of 13 bits). Two synchronous
// read ports and one write port: the multiply-accumulate c_m += b_j * s'_j
// reads a public-key word and an accumulator word in the same cycle. The
// paper uses one 18K BRAM for public-key storage and run-time lattice
// generation; the exact contents, the depth and the second read port are this
// design's choices (on an FPGA the second read port costs a second BRAM copy
// or a half-rate pass).
//
// Timing: `rdata[i]` is valid the cycle after `re[i]`.
module pk_mem
  import rudraksh_pkg::*;
#(
  parameter int unsigned DEPTH = M2_DEPTH,
  parameter int unsigned AW    = M2_AW
) (
  input  logic          clk,
  input  logic [1:0]          re,
  input  logic [1:0][AW-1:0]  raddr,
  output coeff_t [1:0]        rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  coeff_t        wdata
);

  coeff_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re[0]) rdata[0] <= mem[raddr[0]];
    if (re[1]) rdata[1] <= mem[raddr[1]];
  end

endmodule

// ASCON-XOF sponge core with a 64-bit rate.
//
// The state starts from the precomputed result of p^12(IV || 0), so the
// initialisation permutation costs no cycles, as in the paper. Each absorbed
// 64-bit block is XORed into x0 and followed by p^12 (12 cycles). Each squeeze
// returns the current x0 at once and then runs p^12 to prepare the next word
// (12 cycles), so three absorbs and four squeezes take 3*12 + 4*12 = 84 cycles,
// the secret-sampling time the paper quotes.
//
// Padding is done here (the paper's core has a padding block in front of the
// absorb): the final block carries `nbits` (0..63) valid bits in its low bits,
// the bits above are cleared and a single 1 is set at bit `nbits`. Bits are
// filled from the LSB of the block upward, the order in which the paper's
// 76-bit buffer packs coefficients; the mapping of bits into the ASCON state
// words (the block is XORed into x0 as it is, without a byte swap) is this
// design's choice, so outputs are not byte-compatible with software Ascon-XOF.
//
// Interface: `init` (1 cycle), `absorb` with `blk`/`last`/`nbits`, `squeeze`;
// commands are accepted only while `busy` is low. `out_valid` pulses with `out`
// in the cycle after a squeeze is accepted.
module ascon_xof
  import rudraksh_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  input  logic        absorb,
  input  logic [63:0] blk,
  input  logic        last,
  input  logic [5:0]  nbits,
  input  logic        squeeze,
  output logic [63:0] out,
  output logic        out_valid,
  output logic        busy
);

  logic [319:0] state, state_in;
  logic         p_load, p_start, p_busy, p_done;
  logic [63:0]  blk_p, mask;

  assign mask  = (64'd1 << nbits) - 64'd1;
  assign blk_p = last ? ((blk & mask) | (64'd1 << nbits)) : blk;

  always_comb begin
    p_load   = 1'b0;
    p_start  = 1'b0;
    state_in = state;
    if (!p_busy) begin
      if (init) begin
        p_load   = 1'b1;
        state_in = XOF_INIT;
      end else if (absorb) begin
        p_start  = 1'b1;
        state_in = {state[319:256] ^ blk_p, state[255:0]};
      end else if (squeeze) begin
        p_start  = 1'b1;
      end
    end
  end

  ascon_perm #(.ROUNDS(12)) u_perm (
    .clk, .rst_n, .load(p_load), .start(p_start), .state_i(state_in),
    .state_o(state), .busy(p_busy), .done(p_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (!p_busy && !init && !absorb && squeeze) begin
        out       <= state[319:256];
        out_valid <= 1'b1;
      end
    end
  end

  assign busy = p_busy;

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0({init, absorb, squeeze}))
    else $error("ascon_xof: more than one command");

endmodule

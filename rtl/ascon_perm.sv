// ASCON permutation p^12, iterated one round per clock cycle.
//
// The 320-bit state is {x0,x1,x2,x3,x4}, x0 in the top 64 bits. A round is the
// ASCON round of the cipher's specification: round constant added to x2, the
// bit-sliced 5-bit S-box, and the linear layer of two rotations per word.
// A 4-bit round counter runs the ROUNDS rounds (constant index 12-ROUNDS .. 11),
// as the permutation of the paper's ASCON-XOF core does ("Permutation p^12"
// and "Round counter" are its two parts in the resource table).
//
// Interface: pulse `load` to copy `state_i` into the state register without
// permuting it, or `start` to permute `state_i`; `busy` is high
// for ROUNDS cycles and `done` pulses in the cycle `state_o` first holds the
// result. `state_o` keeps the result until the next start. Starting while busy
// is not allowed (asserted).
module ascon_perm #(
  parameter int unsigned ROUNDS = 12
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic         start,
  input  logic [319:0] state_i,
  output logic [319:0] state_o,
  output logic         busy,
  output logic         done
);

  logic [3:0] rnd;

  function automatic logic [63:0] rotr(input logic [63:0] x, input int unsigned n);
    return (x >> n) | (x << (64 - n));
  endfunction

  function automatic logic [319:0] round_f(input logic [319:0] s, input logic [3:0] r);
    logic [63:0] x0, x1, x2, x3, x4, t0, t1, t2, t3, t4;
    {x0, x1, x2, x3, x4} = s;
    x2 ^= {56'd0, 4'hf - r, r};
    x0 ^= x4; x4 ^= x3; x2 ^= x1;
    t0 = ~x0 & x1; t1 = ~x1 & x2; t2 = ~x2 & x3; t3 = ~x3 & x4; t4 = ~x4 & x0;
    x0 ^= t1; x1 ^= t2; x2 ^= t3; x3 ^= t4; x4 ^= t0;
    x1 ^= x0; x0 ^= x4; x3 ^= x2; x2 = ~x2;
    x0 ^= rotr(x0, 19) ^ rotr(x0, 28);
    x1 ^= rotr(x1, 61) ^ rotr(x1, 39);
    x2 ^= rotr(x2, 1)  ^ rotr(x2, 6);
    x3 ^= rotr(x3, 10) ^ rotr(x3, 17);
    x4 ^= rotr(x4, 7)  ^ rotr(x4, 41);
    return {x0, x1, x2, x3, x4};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      rnd     <= '0;
      state_o <= '0;
    end else begin
      done <= 1'b0;
      if (load && !busy) begin
        state_o <= state_i;
      end else if (start && !busy) begin
        state_o <= round_f(state_i, 4'(12 - ROUNDS));
        rnd     <= 4'(12 - ROUNDS + 1);
        busy    <= (ROUNDS > 1);
        done    <= (ROUNDS == 1);
      end else if (busy) begin
        state_o <= round_f(state_o, rnd);
        rnd     <= rnd + 4'd1;
        if (rnd == 4'd11) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(start && busy))
    else $error("ascon_perm: start while busy");

endmodule

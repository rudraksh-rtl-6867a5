// 76-bit buffer / shift register between the ASCON-XOF core and its users.
//
// It holds `cnt` valid bits, the oldest in the LSBs. A push appends `push_w`
// bits (13 for a public-key coefficient on its way into the sponge, 64 for a
// squeezed XOF word) above the valid ones; a pop removes the lowest `pop_w`
// bits (64 for an absorb block, 13 for a rejection-sampler candidate, 8 for the
// two CBD lanes). Push and pop may happen in the same cycle: the pop is taken
// from the old contents. `data` shows the lowest 64 bits at all times.
//
// The width follows the paper's argument: since gcd(13, 64) = 1, up to 12 bits
// can be left over when a new 64-bit word arrives (or 63 when a 13-bit
// coefficient arrives), so 64 + 12 = 76 bits are needed. The generic push/pop
// interface is this design's choice.
//
// The caller must keep cnt - pop_w + push_w <= 76 and pop_w <= cnt (asserted).
module xof_buffer #(
  parameter int unsigned WIDTH = 76
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        push,
  input  logic [6:0]  push_w,
  input  logic [63:0] push_data,
  input  logic        pop,
  input  logic [6:0]  pop_w,
  output logic [63:0] data,
  output logic [6:0]  cnt
);

  logic [WIDTH-1:0] sr, kept, ins, mask_in;
  logic [6:0]       pw, rest;

  always_comb begin
    pw      = pop ? pop_w : 7'd0;
    kept    = sr >> pw;
    rest    = cnt - pw;
    mask_in = (WIDTH'(1) << push_w) - WIDTH'(1);
    ins     = (WIDTH'(push_data) & mask_in) << rest;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr  <= '0;
      cnt <= '0;
    end else if (clear) begin
      sr  <= '0;
      cnt <= '0;
    end else if (push) begin
      sr  <= kept | ins;
      cnt <= rest + push_w;
    end else if (pop) begin
      sr  <= kept;
      cnt <= rest;
    end
  end

  assign data = sr[63:0];

  assert property (@(posedge clk) disable iff (!rst_n) pop |-> (pop_w <= cnt))
    else $error("xof_buffer: underflow");
  assert property (@(posedge clk) disable iff (!rst_n) push |-> (int'(cnt) - int'(pw) + int'(push_w) <= WIDTH))
    else $error("xof_buffer: overflow");

endmodule

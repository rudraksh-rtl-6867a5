// Centered binomial sampler, eta = 2, with LANES lanes side by side.
//
// Each lane takes 4 XOF bits a[0..3] and returns b = HW(a[0:1]) - HW(a[2:3]),
// a value in [-2, 2], as an element of Z_q (negative values become q + b).
// The paper gives this operation and lists two CBD instances ("CBD(x2)"); the
// nibble order (lane i takes bits 4i..4i+3, and a[0] is the lowest bit) is
// this design's choice.
//
// Timing: combinational input, registered output one cycle after `in_valid`.
module cbd_sampler
  import rudraksh_pkg::*;
#(
  parameter int unsigned LANES = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [4*LANES-1:0]     in_bits,
  output logic                   out_valid,
  output logic [LANES-1:0][QW-1:0] out_coeff
);

  logic [LANES-1:0][QW-1:0] coeff;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic [1:0] ha, hb;
      ha = {1'b0, in_bits[4*i]}   + {1'b0, in_bits[4*i+1]};
      hb = {1'b0, in_bits[4*i+2]} + {1'b0, in_bits[4*i+3]};
      if (ha >= hb) coeff[i] = QW'(ha - hb);
      else          coeff[i] = QW'(Q) - QW'(hb - ha);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_coeff <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_coeff <= coeff;
    end
  end

endmodule

// Rejection sampler for the public matrix A-hat.
//
// A 13-bit candidate from the XOF buffer is accepted as a coefficient when it
// is below q and dropped otherwise, as the paper describes; accepted values
// are numbered 0..63 in the order they arrive. After the 64th acceptance
// `full` rises and further candidates are ignored until `clear`. The sampler
// is not constant time, which the paper notes is harmless for a public matrix.
//
// Timing: one candidate per cycle; `out_valid`, `out_coeff` and `out_idx` are
// registered, one cycle after `in_valid`.
module rej_sampler
  import rudraksh_pkg::*;
#(
  parameter int unsigned QMOD = Q
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  input  logic [QW-1:0] in_data,
  output logic          out_valid,
  output logic [QW-1:0] out_coeff,
  output logic [5:0]    out_idx,
  output logic          full
);

  logic [6:0] count;
  logic       accept;

  assign accept = in_valid && !count[6] && (32'(in_data) < QMOD);
  assign full   = count[6];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      out_valid <= 1'b0;
      out_coeff <= '0;
      out_idx   <= '0;
    end else begin
      out_valid <= accept && !clear;
      if (accept) begin
        out_coeff <= in_data;
        out_idx   <= count[5:0];
      end
      if (clear)       count <= '0;
      else if (accept) count <= count + 7'd1;
    end
  end

endmodule

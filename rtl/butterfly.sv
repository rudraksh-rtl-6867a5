// Reconfigurable butterfly unit: one multiplier, an adder in front of the
// shift-and-add reduction, and a shifter, shared by every coefficient-level
// operation of the scheme. The 3-bit `mode` (rudraksh_pkg::bf_mode_e) selects:
//
//   BF_NTT    Cooley-Tukey:   out0 = a + w*b,        out1 = a - w*b
//   BF_INTT   Gentleman-Sande with the 1/2 of each level folded in (the
//             INTT needs no final multiplication by 1/n):
//                             out0 = (a + b)/2,      out1 = w*(b - a)/2
//   BF_MAC    point-wise multiply-accumulate: out0 = a*b + c
//   BF_ADD / BF_SUB           out0 = a + b / a - b
//   BF_COMP   fsel FS_U:   compress(a,1024) = ((a<<10)+q/2)*(2^32/q+1) >> 32, low 10 bits
//             fsel FS_V:   compress(a,32)   = ((a<<5) +q/2)*(2^27/q+1) >> 27, low 5 bits
//             fsel FS_MSG: Decode(a)        = ((a<<2) +q/2)*(2^30/q+1) >> 30, low 2 bits
//   BF_DECOMP fsel FS_U:   decompress(a,1024) = (q*a + 512) >> 10
//             fsel FS_V:   decompress(a,32)   = (q*a + 16)  >> 5
//             fsel FS_MSG: Encode(a)          = (q*a + 2)   >> 2
// All results are in [0, q). The constants are the paper's. Halving is
// x/2 for even x and (x+q)/2 for odd x. The paper's figure prints 32 as the
// rounding input for the 5-bit decompression while its text gives
// (q*v + 16) >> 5; the text is followed, since 16 is the rounding half of 32.
//
// Pipeline (6 stages, the depth the paper gives): S1 operand selection,
// a+b and b-a; S2 multiply and add; S3-S5 the shift-and-add reduction (the
// compress/decompress product is shifted in S3 and delayed); S6 the final
// add/subtract/halve and output select. A new operation is accepted every
// cycle; `v_out`, `out0`, `out1` and `tag_out` appear 6 cycles after `v_in`.
// `tag` is carried alongside for the caller (write addresses).
//
// The order of operations inside the stages and the way the second output
// of NTT/INTT is produced are this design's choices: the figure shows one
// adder/subtractor and a single output.
module butterfly
  import rudraksh_pkg::*;
#(
  parameter int unsigned TAGW = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            v_in,
  input  bf_mode_e        mode,
  input  fsel_e           fsel,
  input  coeff_t          a,
  input  coeff_t          b,
  input  coeff_t          c,
  input  coeff_t          w,
  input  logic [TAGW-1:0] tag,
  output logic            v_out,
  output coeff_t          out0,
  output coeff_t          out1,
  output logic [TAGW-1:0] tag_out
);

  localparam int unsigned LAT = 6;

  function automatic coeff_t add_q(input coeff_t x, input coeff_t y);
    logic [QW:0] s;
    s = {1'b0, x} + {1'b0, y};
    return (s >= (QW+1)'(Q)) ? coeff_t'(s - (QW+1)'(Q)) : coeff_t'(s);
  endfunction

  function automatic coeff_t sub_q(input coeff_t x, input coeff_t y);
    return (x >= y) ? coeff_t'(x - y) : coeff_t'(x + coeff_t'(Q) - y);
  endfunction

  function automatic coeff_t half_q(input coeff_t x);
    logic [QW:0] s;
    s = x[0] ? ({1'b0, x} + (QW+1)'(Q)) : {1'b0, x};
    return coeff_t'(s >> 1);
  endfunction

  // delay line for control, tag and pass-through operands (S1 .. S5)
  typedef struct packed {
    logic            v;
    bf_mode_e        mode;
    fsel_e           fsel;
    coeff_t          a;
    coeff_t          b;
    coeff_t          sum;
    logic [TAGW-1:0] tag;
  } pipe_t;

  pipe_t p [1:5];

  // S1 operands
  logic [23:0] s1_x;
  logic [19:0] s1_y;
  logic [12:0] s1_add;
  // S2 product
  logic [43:0] s2_prod;
  // S3..S5: shifted compress/decompress result
  logic [12:0] sh3, sh4, sh5;
  // reduction output (at S5)
  coeff_t      red;
  logic        red_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i <= 5; i++) p[i] <= '0;
      s1_x <= '0; s1_y <= '0; s1_add <= '0; s2_prod <= '0;
      sh3 <= '0; sh4 <= '0; sh5 <= '0;
      v_out <= 1'b0; out0 <= '0; out1 <= '0; tag_out <= '0;
    end else begin
      // ---------------- S1
      p[1].v    <= v_in;
      p[1].mode <= mode;
      p[1].fsel <= fsel;
      p[1].a    <= a;
      p[1].b    <= b;
      p[1].sum  <= add_q(a, b);
      p[1].tag  <= tag;
      s1_add    <= '0;
      s1_x      <= '0;
      s1_y      <= '0;
      unique case (mode)
        BF_NTT:  begin s1_x <= 24'(b); s1_y <= 20'(w); end
        BF_INTT: begin s1_x <= 24'(sub_q(b, a)); s1_y <= 20'(w); end
        BF_MAC:  begin s1_x <= 24'(a); s1_y <= 20'(b); s1_add <= c; end
        BF_COMP: begin
          unique case (fsel)
            FS_U:    begin s1_x <= (24'(a) << 10) + 24'(HALF_Q); s1_y <= 20'd559168; end
            FS_V:    begin s1_x <= (24'(a) << 5)  + 24'(HALF_Q); s1_y <= 20'd17474;  end
            default: begin s1_x <= (24'(a) << 2)  + 24'(HALF_Q); s1_y <= 20'd139792; end
          endcase
        end
        BF_DECOMP: begin
          s1_x <= 24'(a); s1_y <= 20'(Q);
          unique case (fsel)
            FS_U:    s1_add <= 13'd512;
            FS_V:    s1_add <= 13'd16;
            default: s1_add <= 13'd2;
          endcase
        end
        default: ;
      endcase
      // ---------------- S2: the multiplier (one DSP in the paper) and adder
      p[2]    <= p[1];
      s2_prod <= 44'(s1_x) * 44'(s1_y) + 44'(s1_add);
      // ---------------- S3..S5
      p[3] <= p[2];
      p[4] <= p[3];
      p[5] <= p[4];
      if (p[2].mode == BF_COMP) begin
        unique case (p[2].fsel)
          FS_U:    sh3 <= 13'((s2_prod >> 32) & 44'h3ff);
          FS_V:    sh3 <= 13'((s2_prod >> 27) & 44'h1f);
          default: sh3 <= 13'((s2_prod >> 30) & 44'h3);
        endcase
      end else begin
        unique case (p[2].fsel)
          FS_U:    sh3 <= 13'(s2_prod >> 10);
          FS_V:    sh3 <= 13'(s2_prod >> 5);
          default: sh3 <= 13'(s2_prod >> 2);
        endcase
      end
      sh4 <= sh3;
      sh5 <= sh4;
      // ---------------- S6
      v_out   <= p[5].v;
      tag_out <= p[5].tag;
      out1    <= '0;
      unique case (p[5].mode)
        BF_NTT:    begin out0 <= add_q(p[5].a, red); out1 <= sub_q(p[5].a, red); end
        BF_INTT:   begin out0 <= half_q(p[5].sum); out1 <= half_q(red); end
        BF_MAC:    out0 <= red;
        BF_ADD:    out0 <= p[5].sum;
        BF_SUB:    out0 <= sub_q(p[5].a, p[5].b);
        default:   out0 <= sh5;
      endcase
    end
  end

  // shift-and-add reduction, S3..S5
  modred u_red (
    .clk, .rst_n, .v_in(p[2].v), .c(s2_prod[25:0]), .v_out(red_v), .d(red)
  );

  assert property (@(posedge clk) disable iff (!rst_n) red_v == p[5].v);

endmodule

// lp_fu: one function unit (FU) of a PCU pipeline stage, with the
// low-precision opcodes of the RNN-specialised PCU.
//
// Purely combinational; the pipeline register (PR) that captures its two
// results belongs to the enclosing stage. Operands a and b are 32-bit words.
//   OP_MUL4X8_SPLIT  : a and b each hold four signed 8-bit values. The four
//                      element-wise products p0..p3 are formed and rearranged
//                      into two words of two 16-bit values: y0 = {p1,p0},
//                      y1 = {p3,p2}. This is the fused "4x8 mul" + "8-16 split".
//   OP_ADD2X16_SPLIT : a = {a1,a0}, b = {b1,b0} as signed 16-bit pairs. The
//                      sums s_k = a_k + b_k are padded (sign-extended) into
//                      two 32-bit words y0 = s0, y1 = s1. This is the fused
//                      "2x16 add" + "16-32 split".
//   OP_ADD32         : y0 = a + b (32-bit, wrapping), y1 = 0. The original
//                      full-precision add used by the reduction network.
// The opcode set and the lane layout follow the paper's figure of the fused
// low-precision operations. The paper uses floating-point 8/16-bit types; this
// FU implements the fixed-point mode (the paper states FUs support both).
// Products are kept exact in 16 bits (an 8x8 product always fits), and the
// 16-bit sums saturate, both choices of this design.
module lp_fu
  import rnn_pkg::*;
(
  input  fu_op_e op,
  input  word_t  a,
  input  word_t  b,
  output word_t  y0,
  output word_t  y1
);

  logic signed [15:0] p [4];
  logic signed [15:0] s [2];

  always_comb begin
    for (int k = 0; k < 4; k++)
      p[k] = $signed(a[8*k +: 8]) * $signed(b[8*k +: 8]);
    for (int k = 0; k < 2; k++)
      s[k] = sat16($signed({a[16*k+15], a[16*k +: 16]}) + $signed({b[16*k+15], b[16*k +: 16]}));

    y0 = '0;
    y1 = '0;
    unique case (op)
      OP_MUL4X8_SPLIT: begin
        y0 = {p[1], p[0]};
        y1 = {p[3], p[2]};
      end
      OP_ADD2X16_SPLIT: begin
        y0 = word_t'(32'(s[0]));
        y1 = word_t'(32'(s[1]));
      end
      default: begin
        y0 = a + b;
      end
    endcase
  end

endmodule

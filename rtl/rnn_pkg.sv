// rnn_pkg: types and constants shared by the LSTM serving datapath.
//
// Number formats (this design's choice; the FU supports fixed point, which
// is what is used here):
//   * weights        : signed 8-bit, W_FRAC fractional bits (Q1.6)
//   * x and h inputs : signed 8-bit, X_FRAC fractional bits (Q0.7)
//   * 8x8 products   : signed 16-bit, exact
//   * pair sums      : signed 16-bit, saturating
//   * dot products   : signed 32-bit, W_FRAC+X_FRAC fractional bits, wrapping
//   * element-wise   : signed 32-bit, FX_FRAC (16) fractional bits
// A 32-bit word carries four 8-bit values ("4-float8" slot) or two 16-bit
// values ("2-float16" slot), value 0 in the least significant bits.
package rnn_pkg;

  localparam int unsigned WORD_W  = 32;
  localparam int unsigned W_FRAC  = 6;
  localparam int unsigned X_FRAC  = 7;
  localparam int unsigned DOT_FRAC = W_FRAC + X_FRAC;
  localparam int unsigned FX_FRAC = 16;
  localparam int unsigned NGATES  = 4;     // LSTM: i, j, f, o

  typedef logic [WORD_W-1:0] word_t;

  // FU opcodes: the original 32-bit add and the two fused low-precision
  // operations of the RNN-specialised PCU.
  typedef enum logic [1:0] {
    OP_ADD32         = 2'd0,   // y0 = a + b
    OP_MUL4X8_SPLIT  = 2'd1,   // 4 int8 products, rearranged into two 2x16 words
    OP_ADD2X16_SPLIT = 2'd2    // 2 int16 sums, padded into two 32-bit words
  } fu_op_e;

  typedef enum logic {
    ACT_SIGMOID = 1'b0,
    ACT_TANH    = 1'b1
  } act_e;

  // Gate order inside a gate vector.
  localparam int unsigned GATE_I = 0;
  localparam int unsigned GATE_J = 1;
  localparam int unsigned GATE_F = 2;
  localparam int unsigned GATE_O = 3;

  function automatic logic signed [15:0] sat16(input logic signed [16:0] v);
    if (v > 17'sd32767)       return 16'sh7fff;
    else if (v < -17'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

  function automatic logic signed [7:0] sat8(input logic signed [31:0] v);
    if (v > 32'sd127)       return 8'sh7f;
    else if (v < -32'sd128) return 8'sh80;
    else                    return v[7:0];
  endfunction

  function automatic logic signed [31:0] sat32(input logic signed [47:0] v);
    if (v > 48'sh0000_7fff_ffff)      return 32'sh7fff_ffff;
    else if (v < -48'sh0000_8000_0000) return 32'sh8000_0000;
    else                               return v[31:0];
  endfunction

endpackage

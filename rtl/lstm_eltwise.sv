// lstm_eltwise: the chain of element-wise function units that follows the
// four gate dot products of one hidden element (Eq. 1-6 of an LSTM cell):
//   i = sigma(dot_i + b_i)   j = tanh(dot_j + b_j)
//   f = sigma(dot_f + b_f)   o = sigma(dot_o + b_o)
//   c = f*c_prev + i*j       h = o*tanh(c)
// The order of operations (bias add, activation, Hadamard products, cell
// update, tanh, output product) and the fact that the four gates run in
// parallel follow the paper's loop-based LSTM layout; every intermediate is
// a scalar register.
//
// Five pipeline stages, one result per cycle, LATENCY = 5:
//   1 bias add and rescale of the dot products from Q(W_FRAC+X_FRAC) to Q16
//   2 sigma / tanh of the four gates
//   3 c = f*c_prev + i*j
//   4 tanh(c)
//   5 h = o*tanh(c), and h quantised to the 8-bit Q0.7 input format
// Products are truncated (arithmetic shift) and values saturate at the
// format limits; these are this design's choices. in_tag travels with the data.
module lstm_eltwise
  import rnn_pkg::*;
#(
  parameter int unsigned TAG_W = 16
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [TAG_W-1:0]   in_tag,
  input  logic signed [31:0] in_dot  [NGATES],
  input  logic signed [31:0] in_bias [NGATES],
  input  logic signed [31:0] in_c,
  output logic               out_valid,
  output logic [TAG_W-1:0]   out_tag,
  output logic signed [31:0] out_c,
  output logic signed [31:0] out_h,
  output logic signed [7:0]  out_h8
);

  localparam int unsigned LAT = 5;
  localparam int unsigned UP  = FX_FRAC - DOT_FRAC;

  logic [LAT-1:0]     vld;
  logic [TAG_W-1:0]   tag [LAT];
  logic signed [31:0] s1_pre [NGATES], s1_c;
  logic signed [31:0] s2_act [NGATES], s2_c;
  logic signed [31:0] s3_c, s3_o;
  logic signed [31:0] s4_c, s4_o, s4_tc;
  logic signed [31:0] act    [NGATES];
  logic signed [31:0] tanh_c;
  logic signed [63:0] fc, ij, oh;

  for (genvar g = 0; g < int'(NGATES); g++) begin : g_act
    nonlin u_act (.mode(g == int'(GATE_J) ? ACT_TANH : ACT_SIGMOID), .x(s1_pre[g]), .y(act[g]));
  end
  nonlin u_tanh_c (.mode(ACT_TANH), .x(s3_c), .y(tanh_c));

  always_comb begin
    fc = s2_act[GATE_F] * s2_c;
    ij = s2_act[GATE_I] * s2_act[GATE_J];
    oh = s4_o * s4_tc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      for (int k = 0; k < int'(LAT); k++) tag[k] <= '0;
      for (int g = 0; g < int'(NGATES); g++) begin
        s1_pre[g] <= '0;
        s2_act[g] <= '0;
      end
      s1_c <= '0; s2_c <= '0; s3_c <= '0; s3_o <= '0;
      s4_c <= '0; s4_o <= '0; s4_tc <= '0;
      out_c <= '0; out_h <= '0; out_h8 <= '0;
    end else begin
      vld    <= {vld[LAT-2:0], in_valid};
      tag[0] <= in_tag;
      for (int k = 1; k < int'(LAT); k++) tag[k] <= tag[k-1];
      // stage 1: bias add, rescale to Q16
      for (int g = 0; g < int'(NGATES); g++)
        s1_pre[g] <= sat32((48'(in_dot[g]) + 48'(in_bias[g])) <<< UP);
      s1_c <= in_c;
      // stage 2: activations
      for (int g = 0; g < int'(NGATES); g++) s2_act[g] <= act[g];
      s2_c <= s1_c;
      // stage 3: cell update
      s3_c <= sat32(48'((fc + ij) >>> FX_FRAC));
      s3_o <= s2_act[GATE_O];
      // stage 4: tanh(c)
      s4_c  <= s3_c;
      s4_o  <= s3_o;
      s4_tc <= tanh_c;
      // stage 5: output
      out_c  <= s4_c;
      out_h  <= 32'(oh >>> FX_FRAC);
      out_h8 <= sat8(32'(oh >>> (2*FX_FRAC - X_FRAC)));
    end
  end

  assign out_valid = vld[LAT-1];
  assign out_tag   = tag[LAT-1];

endmodule

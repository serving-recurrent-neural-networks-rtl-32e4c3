// pcu: pattern compute unit specialised for low-precision map-reduce.
//
// A LANES-wide SIMD pipeline of four stages, one FU per lane per stage, with
// pipeline registers (PRs) between stages. Per cycle it consumes one 32-bit
// word of weights and one of activations per lane, i.e. 4*LANES signed 8-bit
// pairs (64 at LANES=16, the rv of the paper's RNN mappings), and it adds
// their dot product into an accumulator.
//   stage 1  OP_MUL4X8_SPLIT  : 4 products per lane into 2 PRs of 2x16 bits
//   stage 2  OP_ADD2X16_SPLIT : pairwise 16-bit sums, padded into 2 PRs of 32 bits
//   stage 3  OP_ADD32         : the two PRs of a lane added into one 32-bit value
//   stage 4  folded_reduce    : cross-lane tree folded into one stage + accumulator
// The stage order and operations are those of the paper's fused low-precision
// pipeline with folded reduction (16 lanes, 4 stages).
//
// Timing: a vector sampled at edge e reaches the accumulator after edge
// e+3+log2(LANES), i.e. LATENCY = 4+log2(LANES) edges (8 at 16 lanes); a new
// vector is accepted every cycle. The paper quotes 2+log2(LANES)+1 cycles,
// which leaves out the stage-3 add; here every FU result is registered, which
// costs that one cycle more.
// Interface: in_first/in_last/out_valid as in folded_reduce.
module pcu
  import rnn_pkg::*;
#(
  parameter int unsigned LANES = 16
)(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  logic  in_last,
  input  word_t in_w [LANES],
  input  word_t in_x [LANES],
  output logic  out_valid,
  output word_t out_sum
);

  word_t f1_a [LANES], f1_b [LANES];   // stage 1 FU outputs
  word_t f2_a [LANES], f2_b [LANES];   // stage 2 FU outputs
  word_t f3   [LANES], f3_unused [LANES];
  word_t pr1_a [LANES], pr1_b [LANES]; // PRs after stage 1
  word_t pr2_a [LANES], pr2_b [LANES]; // PRs after stage 2
  word_t pr3   [LANES];                // PRs after stage 3
  logic [2:0] vld, first, last;

  for (genvar l = 0; l < int'(LANES); l++) begin : g_lane
    lp_fu u_s1 (.op(OP_MUL4X8_SPLIT),  .a(in_w[l]),  .b(in_x[l]),  .y0(f1_a[l]), .y1(f1_b[l]));
    lp_fu u_s2 (.op(OP_ADD2X16_SPLIT), .a(pr1_a[l]), .b(pr1_b[l]), .y0(f2_a[l]), .y1(f2_b[l]));
    lp_fu u_s3 (.op(OP_ADD32),         .a(pr2_a[l]), .b(pr2_b[l]), .y0(f3[l]),   .y1(f3_unused[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld   <= '0;
      first <= '0;
      last  <= '0;
      for (int l = 0; l < int'(LANES); l++) begin
        pr1_a[l] <= '0; pr1_b[l] <= '0;
        pr2_a[l] <= '0; pr2_b[l] <= '0;
        pr3[l]   <= '0;
      end
    end else begin
      vld   <= {vld[1:0],   in_valid};
      first <= {first[1:0], in_first};
      last  <= {last[1:0],  in_last};
      for (int l = 0; l < int'(LANES); l++) begin
        pr1_a[l] <= f1_a[l]; pr1_b[l] <= f1_b[l];
        pr2_a[l] <= f2_a[l]; pr2_b[l] <= f2_b[l];
        pr3[l]   <= f3[l];
      end
    end
  end

  folded_reduce #(.LANES(LANES)) u_red (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (vld[2]),
    .in_first (first[2]),
    .in_last  (last[2]),
    .in_v     (pr3),
    .out_valid(out_valid),
    .out_sum  (out_sum)
  );

  // Handshake rules: first/last only with valid.
  a_flags_need_valid: assert property (@(posedge clk) disable iff (!rst_n)
    (in_first || in_last) |-> in_valid)
    else $error("pcu: in_first/in_last asserted without in_valid");

endmodule

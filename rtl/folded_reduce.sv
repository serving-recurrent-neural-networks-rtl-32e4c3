// folded_reduce: the last PCU stage. Reduces LANES 32-bit lane values to one
// sum and accumulates successive sums, fully pipelined.
//
// The paper folds the whole cross-lane reduction tree into a single pipeline
// stage: the later tree levels are mapped onto the FUs of lanes the earlier
// levels leave free, and the pipeline registers of that stage carry the
// partial sums from one level to the next. A tree over LANES values needs
// LANES-1 adders, so with the accumulator the stage uses exactly LANES FUs.
// Each tree level is one cycle and the accumulation one more, so a vector
// entering at edge e shows up in the accumulator after edge e+log2(LANES)+1,
// and a new vector can enter every cycle (no structural hazard).
//
// Interface: in_valid qualifies in_v. in_first starts a new accumulation
// (the accumulator is loaded instead of added to); in_last marks the final
// vector of a dot product, and out_valid pulses for one cycle when its sum
// is in out_sum. The first/last protocol is this design's choice.
module folded_reduce
  import rnn_pkg::*;
#(
  parameter int unsigned LANES = 16
)(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  logic  in_last,
  input  word_t in_v [LANES],
  output logic  out_valid,
  output word_t out_sum
);

  localparam int unsigned LEVELS = $clog2(LANES);

  // tree[l] holds the LANES>>l partial sums after level l (tree[0] is the input)
  word_t tree   [LEVELS+1][LANES];
  logic  vld    [LEVELS+1];
  logic  first  [LEVELS+1];
  logic  last   [LEVELS+1];

  always_comb begin
    for (int i = 0; i < int'(LANES); i++) tree[0][i] = in_v[i];
    vld[0]   = in_valid;
    first[0] = in_first;
    last[0]  = in_last;
  end

  for (genvar l = 0; l < int'(LEVELS); l++) begin : g_level
    localparam int unsigned NOUT = LANES >> (l + 1);
    word_t sum [NOUT];
    for (genvar i = 0; i < int'(NOUT); i++) begin : g_fu
      word_t unused_hi;
      lp_fu u_fu (
        .op (OP_ADD32),
        .a  (tree[l][2*i]),
        .b  (tree[l][2*i+1]),
        .y0 (sum[i]),
        .y1 (unused_hi)
      );
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[l+1]   <= 1'b0;
        first[l+1] <= 1'b0;
        last[l+1]  <= 1'b0;
        for (int i = 0; i < int'(LANES); i++) tree[l+1][i] <= '0;
      end else begin
        vld[l+1]   <= vld[l];
        first[l+1] <= first[l];
        last[l+1]  <= last[l];
        for (int i = 0; i < int'(LANES); i++)
          tree[l+1][i] <= (i < int'(NOUT)) ? sum[i] : '0;
      end
    end
  end

  // Accumulator FU: the LANES-th FU of the folded stage.
  word_t acc, acc_next, acc_b, acc_unused;
  assign acc_b = first[LEVELS] ? '0 : acc;
  lp_fu u_acc (
    .op (OP_ADD32),
    .a  (tree[LEVELS][0]),
    .b  (acc_b),
    .y0 (acc_next),
    .y1 (acc_unused)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (vld[LEVELS]) acc <= acc_next;
      out_valid <= vld[LEVELS] && last[LEVELS];
    end
  end

  assign out_sum = acc;

  initial begin
    assert (LANES >= 2 && (LANES & (LANES - 1)) == 0)
      else $error("folded_reduce: LANES must be a power of two");
  end

endmodule

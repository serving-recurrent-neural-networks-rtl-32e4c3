// ru_reduce: pipelined adder tree that adds the N per-PCU partial dot
// products of one gate (N = ru, the number of parallel MapReduce units).
//
// The paper only says that the ru MapReduce results are "reduced and
// accumulated with another reduction tree"; here each PCU accumulates its own
// share over the chunk loop, so this tree only adds the N finished partial
// sums. Inputs are zero-padded to the next power of two; each tree level is
// one register stage, so the latency is max(1, clog2(N)) cycles and a new set
// of inputs is accepted every cycle. Sums are 32-bit and wrap.
module ru_reduce
  import rnn_pkg::*;
#(
  parameter int unsigned N = 8
)(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t in_v [N],
  output logic  out_valid,
  output word_t out_sum
);

  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned NP     = 1 << LEVELS;

  word_t lv  [LEVELS+1][NP];
  logic  vld [LEVELS+1];

  always_comb begin
    for (int i = 0; i < int'(NP); i++) lv[0][i] = (i < int'(N)) ? in_v[i] : '0;
    vld[0] = in_valid;
  end

  for (genvar l = 0; l < int'(LEVELS); l++) begin : g_level
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[l+1] <= 1'b0;
        for (int i = 0; i < int'(NP); i++) lv[l+1][i] <= '0;
      end else begin
        vld[l+1] <= vld[l];
        for (int i = 0; i < int'(NP); i++)
          lv[l+1][i] <= (i < int'(NP >> (l+1))) ? lv[l][2*i] + lv[l][2*i+1] : '0;
      end
    end
  end

  assign out_valid = vld[LEVELS];
  assign out_sum   = lv[LEVELS][0];

endmodule

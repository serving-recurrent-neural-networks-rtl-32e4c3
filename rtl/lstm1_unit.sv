// lstm1_unit: one "LSTM-1" engine. Per outer-loop iteration k it produces one
// element n = k*HU + UNIT of the new cell state c_t and output h_t.
//
// Four gate_dot blocks (gates i, j, f, o) work in parallel on the same
// broadcast input vector, each with its own weight store. When the four dot
// products come out, the bias of element n (a 4-bank PMU row, one bank per
// gate) and the previous cell state c_{t-1}[n] (a 1-bank PMU) are read, and
// lstm_eltwise finishes the element; the new c is written back in place.
// The structure (parallel gates, bias buffer, c buffer, element-wise chain,
// hu copies interleaved over H) follows the paper's loop-based LSTM figure.
// The interleaving n = k*HU + UNIT, the use of small PMUs for bias and c and
// the clear_c option are this design's.
//
// Timing: results come out in issue order. A counter numbers them, so the
// k-th dot product (counted from step_start) belongs to iteration k. From
// the rd_last sample of iteration k to h_valid: gate_dot latency + 1 (bias/c
// read) + 5 (element-wise) edges = 18 at the default sizes. h_valid is
// suppressed for n >= cfg_h (the last iteration may be partly empty when H
// is not a multiple of HU).
module lstm1_unit
  import rnn_pkg::*;
#(
  parameter int unsigned UNIT      = 0,
  parameter int unsigned HU        = 4,
  parameter int unsigned RU        = 8,
  parameter int unsigned LANES     = 16,
  parameter int unsigned PMUS      = 3,
  parameter int unsigned PMU_DEPTH = 1344,
  parameter int unsigned MAX_K     = 512,
  localparam int unsigned RAW      = $clog2(PMUS * PMU_DEPTH),
  localparam int unsigned RUW      = (RU > 1) ? $clog2(RU) : 1,
  localparam int unsigned KW       = (MAX_K > 1) ? $clog2(MAX_K) : 1
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [15:0]        cfg_h,
  input  logic               step_start,
  input  logic               clear_c,
  // loop control and broadcast vector (vec one cycle after rd_*)
  input  logic               rd_valid,
  input  logic               rd_first,
  input  logic               rd_last,
  input  logic [RAW-1:0]     rd_row,
  input  word_t              vec [RU][LANES],
  // weight load
  input  logic               w_en,
  input  logic [1:0]         w_gate,
  input  logic [RUW-1:0]     w_pcu,
  input  logic [RAW-1:0]     w_row,
  input  word_t              w_data [LANES],
  // bias load
  input  logic               b_en,
  input  logic [1:0]         b_gate,
  input  logic [KW-1:0]      b_idx,
  input  logic signed [31:0] b_data,
  // results
  output logic               h_valid,
  output logic [15:0]        h_idx,
  output logic signed [7:0]  h8,
  output logic signed [31:0] h_q16,
  output logic signed [31:0] c_q16
);

  word_t dot   [NGATES];
  logic  dvld  [NGATES];

  for (genvar g = 0; g < int'(NGATES); g++) begin : g_gate
    gate_dot #(.RU(RU), .LANES(LANES), .PMUS(PMUS), .PMU_DEPTH(PMU_DEPTH)) u_dot (
      .clk      (clk),
      .rst_n    (rst_n),
      .rd_valid (rd_valid),
      .rd_first (rd_first),
      .rd_last  (rd_last),
      .rd_row   (rd_row),
      .vec      (vec),
      .wr_en    (w_en && w_gate == 2'(g)),
      .wr_pcu   (w_pcu),
      .wr_row   (w_row),
      .wr_data  (w_data),
      .out_valid(dvld[g]),
      .out_dot  (dot[g])
    );
  end

  // ---- result numbering and bias / c reads -------------------------------
  logic [KW-1:0]      kout, k_q;
  logic               v_q, clr_step;
  logic signed [31:0] dot_q [NGATES];
  word_t              bias_rd [NGATES];
  word_t              c_rd [1];
  word_t              c_wr [1];
  word_t              b_wr [NGATES];
  logic [NGATES-1:0]  b_mask;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kout <= '0; k_q <= '0; v_q <= 1'b0; clr_step <= 1'b0;
      for (int g = 0; g < int'(NGATES); g++) dot_q[g] <= '0;
    end else begin
      if (step_start) begin
        kout     <= '0;
        clr_step <= clear_c;
      end else if (dvld[0]) begin
        kout <= kout + 1'b1;
      end
      v_q <= dvld[0] && !step_start;
      k_q <= kout;
      for (int g = 0; g < int'(NGATES); g++) dot_q[g] <= dot[g];
    end
  end

  always_comb begin
    for (int g = 0; g < int'(NGATES); g++) begin
      b_wr[g]   = b_data;
      b_mask[g] = (b_gate == 2'(g));
    end
  end

  pmu #(.BANKS(NGATES), .DEPTH(MAX_K)) u_bias (
    .clk(clk), .rd_en(dvld[0]), .rd_addr(kout), .rd_data(bias_rd),
    .wr_en(b_en), .wr_addr(b_idx), .wr_mask(b_mask), .wr_data(b_wr)
  );

  // ---- element-wise chain -------------------------------------------------
  logic               e_valid;
  logic [KW-1:0]      e_tag;
  logic signed [31:0] e_c, e_h;
  logic signed [7:0]  e_h8;
  logic signed [31:0] bias_s [NGATES];
  logic signed [31:0] c_prev;

  always_comb begin
    for (int g = 0; g < int'(NGATES); g++) bias_s[g] = bias_rd[g];
    c_prev  = clr_step ? '0 : c_rd[0];
    c_wr[0] = e_c;
  end

  pmu #(.BANKS(1), .DEPTH(MAX_K)) u_cstate (
    .clk(clk), .rd_en(dvld[0]), .rd_addr(kout), .rd_data(c_rd),
    .wr_en(e_valid), .wr_addr(e_tag), .wr_mask(1'b1), .wr_data(c_wr)
  );

  lstm_eltwise #(.TAG_W(KW)) u_elt (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (v_q),
    .in_tag   (k_q),
    .in_dot   (dot_q),
    .in_bias  (bias_s),
    .in_c     (c_prev),
    .out_valid(e_valid),
    .out_tag  (e_tag),
    .out_c    (e_c),
    .out_h    (e_h),
    .out_h8   (e_h8)
  );

  logic [31:0] n_full;
  assign n_full  = 32'(e_tag) * HU + UNIT;
  assign h_valid = e_valid && (n_full < 32'(cfg_h));
  assign h_idx   = n_full[15:0];
  assign h8      = e_h8;
  assign h_q16   = e_h;
  assign c_q16   = e_c;

endmodule

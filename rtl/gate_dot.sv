// gate_dot: the MapReduce of one gate inside one LSTM-1 unit, i.e. the dot
// product of one row of [W_x, W_h] with the input vector [x, h_{t-1}].
//
// RU PCUs work in parallel, each on its own 4*LANES-element slice of the
// vector per cycle (rv*ru = 4*LANES*RU elements per cycle in all). Each PCU
// reads its weights from a private weight store of PMUS pattern memory units
// (one 64-byte row per cycle) and accumulates over the chunk loop; the RU
// partial sums are then added by ru_reduce. Parallel MapReduce units, their
// vectorisation and the second reduction tree follow the paper; the weight
// store layout is this design's: row k*NCH+c of PCU r holds the weights of
// hidden element n=k*HU+u for vector elements (c*RU+r)*4*LANES ...
// +4*LANES-1, where zero weights pad the vector to a whole number of chunks.
//
// Timing: rd_valid/rd_first/rd_last/rd_row are sampled at edge e; the PMU
// data and the vector chunk (vec, supplied by the caller one cycle later)
// enter the PCUs at edge e+1. out_valid pulses LATENCY = 1 + (4+log2 LANES)
// + max(1,clog2 RU) edges after the rd_last sample (12 at the defaults).
// Weights are written one row (LANES words) per cycle through wr_*.
module gate_dot
  import rnn_pkg::*;
#(
  parameter int unsigned RU        = 8,
  parameter int unsigned LANES     = 16,
  parameter int unsigned PMUS      = 3,
  parameter int unsigned PMU_DEPTH = 1344,
  localparam int unsigned ROWS     = PMUS * PMU_DEPTH,
  localparam int unsigned RAW      = $clog2(ROWS),
  localparam int unsigned RUW      = (RU > 1) ? $clog2(RU) : 1
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           rd_valid,
  input  logic           rd_first,
  input  logic           rd_last,
  input  logic [RAW-1:0] rd_row,
  input  word_t          vec [RU][LANES],
  input  logic           wr_en,
  input  logic [RUW-1:0] wr_pcu,
  input  logic [RAW-1:0] wr_row,
  input  word_t          wr_data [LANES],
  output logic           out_valid,
  output word_t          out_dot
);

  localparam int unsigned PAW = (PMU_DEPTH > 1) ? $clog2(PMU_DEPTH) : 1;
  localparam int unsigned PSW = (PMUS > 1) ? $clog2(PMUS) : 1;

  logic [PSW-1:0] rd_sel, rd_sel_q, wr_sel;
  logic [PAW-1:0] rd_loc, wr_loc;
  logic           d_valid, d_first, d_last;

  assign rd_sel = PSW'(32'(rd_row) / PMU_DEPTH);
  assign rd_loc = PAW'(32'(rd_row) % PMU_DEPTH);
  assign wr_sel = PSW'(32'(wr_row) / PMU_DEPTH);
  assign wr_loc = PAW'(32'(wr_row) % PMU_DEPTH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0; d_first <= 1'b0; d_last <= 1'b0; rd_sel_q <= '0;
    end else begin
      d_valid  <= rd_valid;
      d_first  <= rd_valid && rd_first;
      d_last   <= rd_valid && rd_last;
      rd_sel_q <= rd_sel;
    end
  end

  word_t part   [RU];
  logic  pvalid [RU];

  for (genvar r = 0; r < int'(RU); r++) begin : g_mr
    word_t pdata [PMUS][LANES];
    word_t w     [LANES];
    for (genvar p = 0; p < int'(PMUS); p++) begin : g_pmu
      pmu #(.BANKS(LANES), .DEPTH(PMU_DEPTH)) u_pmu (
        .clk     (clk),
        .rd_en   (rd_valid && rd_sel == PSW'(p)),
        .rd_addr (rd_loc),
        .rd_data (pdata[p]),
        .wr_en   (wr_en && 32'(wr_pcu) == r && wr_sel == PSW'(p)),
        .wr_addr (wr_loc),
        .wr_mask ({LANES{1'b1}}),
        .wr_data (wr_data)
      );
    end
    always_comb begin
      for (int l = 0; l < int'(LANES); l++) w[l] = '0;
      for (int p = 0; p < int'(PMUS); p++)
        if (rd_sel_q == PSW'(p))
          for (int l = 0; l < int'(LANES); l++) w[l] = pdata[p][l];
    end
    pcu #(.LANES(LANES)) u_pcu (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (d_valid),
      .in_first (d_first),
      .in_last  (d_last),
      .in_w     (w),
      .in_x     (vec[r]),
      .out_valid(pvalid[r]),
      .out_sum  (part[r])
    );
  end

  ru_reduce #(.N(RU)) u_red (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (pvalid[0]),
    .in_v     (part),
    .out_valid(out_valid),
    .out_sum  (out_dot)
  );

endmodule

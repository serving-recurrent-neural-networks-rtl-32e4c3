// rnn_serving_top: single-sample (batch 1) LSTM inference engine, built as
// the loop-based LSTM mapping on the RNN-specialised spatial array.
//
// One time step computes c_t and h_t from x_t, h_{t-1} and c_{t-1}:
//   * vec_buffer holds [x_t, h_{t-1}] and broadcasts one chunk of
//     4*LANES*RU elements per cycle to all MapReduce units;
//   * HU lstm1_unit engines each own every HU-th hidden element; each has
//     4 gates x RU PCUs (4*HU*RU = 128 PCUs at the defaults) with their
//     weight PMUs (3 per PCU, 384 PMUs = 31.5 MiB of weights in all), a
//     bias PMU, a cell-state PMU and the element-wise chain;
//   * loop_controller runs ceil(H/HU) iterations of NCH = ceil((D+H) /
//     (4*LANES*RU)) chunk cycles, back to back;
//   * the units' h_t outputs go to the other half of vec_buffer, where they
//     form the h part of the next step's input, and out of the h_* ports.
// The defaults are the paper's main mapping (hu = 4, ru = 8, rv = 64,
// hv = 1) on its RNN configuration (16-lane PCUs, 84 kB PMUs). The fabric's
// switches and DRAM address generators are not modelled: the host (or a
// DRAM loader) writes weights, biases and inputs through the load ports.
//
// Use: load weights (w_*), biases (b_*), and write [x_0, h_init] with hv_*;
// pulse start with clear_c=1 (c_{-1} = 0); wait for done; write x_1 with
// hv_* (h_0 is already in place); pulse start with clear_c=0; and so on.
// A step takes about ceil(H/HU)*NCH + 19 cycles (see the README).
// Weight layout: unit u, gate g (0 i, 1 j, 2 f, 3 o), PCU r, row k*NCH + c,
// lane l, byte b holds W_g[k*HU + u][(c*RU + r)*4*LANES + 4*l + b], zero
// where either index is out of range. Bias b_idx = k of unit u is for
// element k*HU + u, in Q(W_FRAC+X_FRAC) fixed point.
module rnn_serving_top
  import rnn_pkg::*;
#(
  parameter int unsigned HU        = 4,
  parameter int unsigned RU        = 8,
  parameter int unsigned LANES     = 16,
  parameter int unsigned PMUS      = 3,
  parameter int unsigned PMU_DEPTH = 1344,
  parameter int unsigned MAX_H     = 2048,
  parameter int unsigned MAX_R     = 4096,
  localparam int unsigned MAX_K    = (MAX_H + HU - 1) / HU,
  localparam int unsigned RAW      = $clog2(PMUS * PMU_DEPTH),
  localparam int unsigned RUW      = (RU > 1) ? $clog2(RU) : 1,
  localparam int unsigned HUW      = (HU > 1) ? $clog2(HU) : 1,
  localparam int unsigned KW       = (MAX_K > 1) ? $clog2(MAX_K) : 1,
  localparam int unsigned WAW      = $clog2(MAX_R / 4),
  localparam int unsigned BAW      = $clog2(MAX_R),
  localparam int unsigned CHW      = $clog2((MAX_R + 4*LANES*RU - 1) / (4*LANES*RU)) + 1
)(
  input  logic               clk,
  input  logic               rst_n,
  // step configuration and control
  input  logic [15:0]        cfg_h,
  input  logic [15:0]        cfg_d,
  input  logic               start,
  input  logic               clear_c,
  output logic               busy,
  output logic               done,
  output logic [31:0]        step_cycles,
  // input-vector load (into the buffer the next step reads)
  input  logic               hv_en,
  input  logic [WAW-1:0]     hv_addr,
  input  logic [3:0]         hv_be,
  input  word_t              hv_data,
  // weight load, one 4*LANES-byte row per cycle
  input  logic               w_en,
  input  logic [HUW-1:0]     w_unit,
  input  logic [1:0]         w_gate,
  input  logic [RUW-1:0]     w_pcu,
  input  logic [RAW-1:0]     w_row,
  input  word_t              w_data [LANES],
  // bias load
  input  logic               b_en,
  input  logic [HUW-1:0]     b_unit,
  input  logic [1:0]         b_gate,
  input  logic [KW-1:0]      b_idx,
  input  logic signed [31:0] b_data,
  // hidden-state output stream
  output logic               h_valid [HU],
  output logic [15:0]        h_idx   [HU],
  output logic signed [7:0]  h_data  [HU]
);

  logic           step_start, rd_valid, rd_first, rd_last;
  logic [RAW-1:0] rd_row;
  logic [CHW-1:0] rd_chunk;
  logic           cur_sel;
  word_t          vec [RU][LANES];

  logic               u_hvalid [HU];
  logic [15:0]        u_hidx   [HU];
  logic signed [7:0]  u_h8     [HU];
  logic signed [31:0] u_hq     [HU];
  logic signed [31:0] u_cq     [HU];
  logic [HU-1:0]      hb_en;
  logic [BAW-1:0]     hb_pos   [HU];
  logic [7:0]         hb_data  [HU];

  loop_controller #(.HU(HU), .RU(RU), .LANES(LANES), .RAW(RAW), .CHW(CHW)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .cfg_h      (cfg_h),
    .cfg_d      (cfg_d),
    .res_valid  (u_hvalid[0]),
    .step_start (step_start),
    .rd_valid   (rd_valid),
    .rd_first   (rd_first),
    .rd_last    (rd_last),
    .rd_row     (rd_row),
    .rd_chunk   (rd_chunk),
    .busy       (busy),
    .done       (done),
    .step_cycles(step_cycles)
  );

  vec_buffer #(.RU(RU), .LANES(LANES), .HU(HU), .MAX_R(MAX_R)) u_vec (
    .clk     (clk),
    .rst_n   (rst_n),
    .swap    (step_start),
    .cur_sel (cur_sel),
    .rd_en   (rd_valid),
    .rd_chunk(rd_chunk),
    .rd_vec  (vec),
    .hw_en   (hv_en),
    .hw_addr (hv_addr),
    .hw_be   (hv_be),
    .hw_data (hv_data),
    .h_en    (hb_en),
    .h_pos   (hb_pos),
    .h_data  (hb_data)
  );

  for (genvar u = 0; u < int'(HU); u++) begin : g_unit
    lstm1_unit #(
      .UNIT(u), .HU(HU), .RU(RU), .LANES(LANES),
      .PMUS(PMUS), .PMU_DEPTH(PMU_DEPTH), .MAX_K(MAX_K)
    ) u_lstm1 (
      .clk       (clk),
      .rst_n     (rst_n),
      .cfg_h     (cfg_h),
      .step_start(step_start),
      .clear_c   (clear_c),
      .rd_valid  (rd_valid),
      .rd_first  (rd_first),
      .rd_last   (rd_last),
      .rd_row    (rd_row),
      .vec       (vec),
      .w_en      (w_en && 32'(w_unit) == u),
      .w_gate    (w_gate),
      .w_pcu     (w_pcu),
      .w_row     (w_row),
      .w_data    (w_data),
      .b_en      (b_en && 32'(b_unit) == u),
      .b_gate    (b_gate),
      .b_idx     (b_idx),
      .b_data    (b_data),
      .h_valid   (u_hvalid[u]),
      .h_idx     (u_hidx[u]),
      .h8        (u_h8[u]),
      .h_q16     (u_hq[u]),
      .c_q16     (u_cq[u])
    );
    assign hb_en[u]   = u_hvalid[u];
    assign hb_pos[u]  = BAW'(32'(cfg_d) + 32'(u_hidx[u]));
    assign hb_data[u] = u_h8[u];
    assign h_valid[u] = u_hvalid[u];
    assign h_idx[u]   = u_hidx[u];
    assign h_data[u]  = u_h8[u];
  end

endmodule

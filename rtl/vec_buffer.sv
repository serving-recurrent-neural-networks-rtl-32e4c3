// vec_buffer: double-buffered scratchpad for the cell input vector
// v = [x_t, h_{t-1}] (R = D + H signed 8-bit elements, x first).
//
// The current buffer is read, one chunk per cycle, and broadcast to every
// MapReduce unit: a read of chunk c returns, for each of the RU PCUs r, the
// 4*LANES elements (c*RU + r)*4*LANES ... +4*LANES-1 as LANES 32-bit words.
// While a time step reads the current buffer, the hidden outputs h_t of
// that step (HU byte writes per cycle, at element D + n) and the next input
// x_{t+1} (host word writes with byte enables) go into the other buffer;
// swap exchanges the two at the start of the next step. Double buffering an
// intermediate memory is how the paper's compiler keeps a pipeline running;
// the exact port arrangement is this design's. Reads are registered (one
// cycle); chunks past MAX_R read as zero. Contents are not reset.
module vec_buffer
  import rnn_pkg::*;
#(
  parameter int unsigned RU    = 8,
  parameter int unsigned LANES = 16,
  parameter int unsigned HU    = 4,
  parameter int unsigned MAX_R = 4096,
  localparam int unsigned NW   = MAX_R / 4,
  localparam int unsigned WAW  = $clog2(NW),
  localparam int unsigned BAW  = $clog2(MAX_R),
  localparam int unsigned CHW  = $clog2((MAX_R + 4*LANES*RU - 1) / (4*LANES*RU)) + 1
)(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            swap,
  output logic            cur_sel,
  // chunk read from the current buffer
  input  logic            rd_en,
  input  logic [CHW-1:0]  rd_chunk,
  output word_t           rd_vec [RU][LANES],
  // host word write into the next buffer
  input  logic            hw_en,
  input  logic [WAW-1:0]  hw_addr,
  input  logic [3:0]      hw_be,
  input  word_t           hw_data,
  // hidden-state byte writes into the next buffer
  input  logic [HU-1:0]   h_en,
  input  logic [BAW-1:0]  h_pos  [HU],
  input  logic [7:0]      h_data [HU]
);

  word_t mem [2][NW];
  logic  cur;

  assign cur_sel = cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cur <= 1'b0;
    else if (swap) cur <= ~cur;
  end

  always_ff @(posedge clk) begin
    if (hw_en)
      for (int b = 0; b < 4; b++)
        if (hw_be[b]) mem[~cur][hw_addr][8*b +: 8] <= hw_data[8*b +: 8];
    for (int u = 0; u < int'(HU); u++)
      if (h_en[u]) mem[~cur][h_pos[u][BAW-1:2]][8*h_pos[u][1:0] +: 8] <= h_data[u];
  end

  always_ff @(posedge clk) begin
    if (rd_en)
      for (int r = 0; r < int'(RU); r++)
        for (int l = 0; l < int'(LANES); l++) begin
          automatic int unsigned wa = (32'(rd_chunk) * RU + r) * LANES + l;
          rd_vec[r][l] <= (wa < NW) ? mem[cur][wa[WAW-1:0]] : '0;
        end
  end

endmodule

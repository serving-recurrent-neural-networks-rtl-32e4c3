// pmu: pattern memory unit, a banked on-chip scratchpad.
//
// BANKS independent single-port-per-direction SRAM banks of 32-bit words.
// A row is one word in every bank, so one read returns BANKS words (64
// bytes at 16 banks): exactly one cycle of input for a 16-lane PCU. The
// defaults give the RNN configuration's 84 kB per PMU (16 banks x 1344 rows
// x 4 bytes = 86016 bytes) and the 16 banks of the original PMU.
// The paper does not describe the PMU's inside; the row-striped banking,
// the registered read (one cycle latency), the per-bank write mask and the
// read-before-write behaviour on an address collision are this design's.
// Memory contents are not reset.
module pmu
  import rnn_pkg::*;
#(
  parameter int unsigned BANKS = 16,
  parameter int unsigned DEPTH = 1344,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
)(
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output word_t         rd_data [BANKS],
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [BANKS-1:0] wr_mask,
  input  word_t         wr_data [BANKS]
);

  for (genvar b = 0; b < int'(BANKS); b++) begin : g_bank
    word_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_mask[b] && (32'(wr_addr) < DEPTH)) mem[wr_addr] <= wr_data[b];
      if (rd_en) rd_data[b] <= (32'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
    end
  end

endmodule

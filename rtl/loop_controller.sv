// loop_controller: runs the loop nest of one LSTM time step,
//   Foreach k in 0 until ceil(H/HU)          (outer loop, HU elements at once)
//     MapReduce c in 0 until NCH             (chunk loop, rv*ru elements each)
// with NCH = ceil((D+H) / (4*LANES*RU)). It issues one chunk per cycle with
// no bubbles between iterations, so a step occupies ceil(H/HU)*NCH issue
// cycles plus the pipeline drain. For every issue it gives the weight row
// (k*NCH + c, counted continuously), the vector chunk c and the first/last
// marks of the accumulation. The loop structure is the paper's; the
// schedule without bubbles matches its statement that the pipeline is
// data-flow driven with no dynamic scheduling overhead. The start/busy/done
// handshake, the swap of the vector buffer at start and the end-of-step
// detection (counting the results of LSTM-1 unit 0, which has a valid
// element in every iteration) are this design's.
//
// start is accepted only in IDLE (asserted otherwise is a protocol error).
// done pulses for one cycle when the last result of the step is out;
// step_cycles then holds the step's length in cycles from start to done.
module loop_controller
  import rnn_pkg::*;
#(
  parameter int unsigned HU    = 4,
  parameter int unsigned RU    = 8,
  parameter int unsigned LANES = 16,
  parameter int unsigned RAW   = 13,
  parameter int unsigned CHW   = 4
)(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [15:0]     cfg_h,
  input  logic [15:0]     cfg_d,
  input  logic            res_valid,
  output logic            step_start,
  output logic            rd_valid,
  output logic            rd_first,
  output logic            rd_last,
  output logic [RAW-1:0]  rd_row,
  output logic [CHW-1:0]  rd_chunk,
  output logic            busy,
  output logic            done,
  output logic [31:0]     step_cycles
);

  localparam int unsigned CHUNK = 4 * LANES * RU;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [15:0] nch, kiter, k, res_cnt;
  logic [CHW-1:0] c;
  logic [31:0] cyc;

  logic [16:0] r_len;
  assign r_len = 17'(cfg_d) + 17'(cfg_h);

  assign step_start = start && state == S_IDLE;
  assign rd_valid   = state == S_RUN;
  assign rd_first   = rd_valid && c == '0;
  assign rd_last    = rd_valid && 16'(c) == nch - 1'b1;
  assign rd_chunk   = c;
  assign busy       = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      nch <= '0; kiter <= '0; k <= '0; c <= '0; rd_row <= '0;
      res_cnt <= '0; cyc <= '0; done <= 1'b0; step_cycles <= '0;
    end else begin
      done <= 1'b0;
      if (state != S_IDLE) cyc <= cyc + 1;
      if (state != S_IDLE && res_valid) res_cnt <= res_cnt + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          nch     <= 16'((32'(r_len) + CHUNK - 1) / CHUNK);
          kiter   <= 16'((32'(cfg_h) + HU - 1) / HU);
          k       <= '0;
          c       <= '0;
          rd_row  <= '0;
          res_cnt <= '0;
          cyc     <= 32'd1;
          state   <= (cfg_h == '0) ? S_IDLE : S_RUN;
        end
        S_RUN: begin
          rd_row <= rd_row + 1'b1;
          if (rd_last) begin
            c <= '0;
            k <= k + 1'b1;
            if (k == kiter - 1'b1) state <= S_DRAIN;
          end else begin
            c <= c + 1'b1;
          end
        end
        S_DRAIN: begin
          if (res_valid && res_cnt == kiter - 1'b1) begin
            state       <= S_IDLE;
            done        <= 1'b1;
            step_cycles <= cyc + 1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == S_IDLE)
    else $error("loop_controller: start while a step is running");

endmodule

// pmu_tb: random masked row writes and row reads on a 16-bank PMU of the
// default 84 kB size, checked against a behavioural copy; also checks the
// one-cycle read latency and read-before-write on a collision.
module pmu_tb;
  import rnn_pkg::*;

  localparam int BANKS = 16, DEPTH = 1344;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [AW-1:0] rd_addr = '0, wr_addr = '0;
  logic [BANKS-1:0] wr_mask = '0;
  word_t rd_data [BANKS], wr_data [BANKS];
  word_t model [DEPTH][BANKS];
  int checks = 0, failures = 0;

  pmu #(.BANKS(BANKS), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_row(input int a, input logic [BANKS-1:0] m);
    @(negedge clk);
    wr_en = 1; wr_addr = AW'(a); wr_mask = m;
    for (int b = 0; b < BANKS; b++) begin
      wr_data[b] = $urandom;
      if (m[b]) model[a][b] = wr_data[b];
    end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic read_check(input int a);
    @(negedge clk);
    rd_en = 1; rd_addr = AW'(a);
    @(negedge clk); rd_en = 0;
    for (int b = 0; b < BANKS; b++) begin
      checks++;
      if (rd_data[b] != model[a][b]) begin failures++; $display("FAIL row %0d bank %0d", a, b); end
    end
  endtask

  initial begin
    for (int b = 0; b < BANKS; b++) wr_data[b] = '0;
    for (int a = 0; a < DEPTH; a++) write_row(a, '1);
    for (int n = 0; n < 400; n++) write_row($urandom_range(0, DEPTH - 1), BANKS'($urandom));
    for (int n = 0; n < 400; n++) read_check($urandom_range(0, DEPTH - 1));
    read_check(DEPTH - 1);
    // collision: read and write the same row in one cycle -> old data
    @(negedge clk);
    rd_en = 1; rd_addr = 7; wr_en = 1; wr_addr = 7; wr_mask = '1;
    for (int b = 0; b < BANKS; b++) wr_data[b] = ~model[7][b];
    @(negedge clk); rd_en = 0; wr_en = 0;
    for (int b = 0; b < BANKS; b++) begin
      checks++;
      if (rd_data[b] != model[7][b]) begin failures++; $display("FAIL collision"); end
      model[7][b] = ~model[7][b];
    end
    read_check(7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

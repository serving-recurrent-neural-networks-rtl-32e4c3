// loop_controller_tb: runs steps of several (H, D) sizes and checks the
// issued sequence (one chunk per cycle, no bubbles, first/last marks, the
// running weight row and the chunk index), the number of issues
// ceil(H/HU) * NCH, and that done follows the last of ceil(H/HU) results.
// Results are modelled by a fixed-latency echo of rd_last.
module loop_controller_tb;
  import rnn_pkg::*;

  localparam int HU = 4, RU = 8, LANES = 16, RAW = 13, CHW = 4, ECHO = 9;
  localparam int CH = 4 * LANES * RU;

  logic clk = 0, rst_n = 0, start = 0, res_valid;
  logic [15:0] cfg_h = '0, cfg_d = '0;
  logic step_start, rd_valid, rd_first, rd_last, busy, done;
  logic [RAW-1:0] rd_row;
  logic [CHW-1:0] rd_chunk;
  logic [31:0] step_cycles;
  logic [ECHO-1:0] echo = '0;
  int checks = 0, failures = 0;

  loop_controller #(.HU(HU), .RU(RU), .LANES(LANES), .RAW(RAW), .CHW(CHW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) echo <= {echo[ECHO-2:0], rd_valid && rd_last};
  assign res_valid = echo[ECHO-1];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run_step(input int h, input int d);
    int nch, kit, issues, k, c, row, lat;
    nch = (h + d + CH - 1) / CH;
    kit = (h + HU - 1) / HU;
    @(negedge clk);
    cfg_h = 16'(h); cfg_d = 16'(d); start = 1;
    #1;
    check(step_start, "step_start");
    @(negedge clk); start = 0;
    issues = 0; k = 0; c = 0; row = 0; lat = 1;
    while (!done) begin
      if (rd_valid) begin
        check(rd_chunk == CHW'(c), "chunk");
        check(rd_row == RAW'(row), "row");
        check(rd_first == (c == 0), "first");
        check(rd_last == (c == nch - 1), "last");
        check(issues == row, "no bubbles");
        issues++; row++;
        if (c == nch - 1) begin c = 0; k++; end else c++;
      end
      check(busy, "busy");
      @(negedge clk);
      lat++;
    end
    check(issues == kit * nch, $sformatf("issues %0d", issues));
    check(lat == kit * nch + ECHO + 1, $sformatf("step length %0d", lat));
    check(step_cycles == 32'(lat), $sformatf("step_cycles %0d vs %0d", step_cycles, lat));
    @(negedge clk);
    check(!busy && !done, "idle after done");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_step(256, 256);
    run_step(512, 512);
    run_step(1024, 1024);
    run_step(10, 7);
    run_step(2048, 2048);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// folded_reduce_tb: random groups of 16-lane vectors through the folded
// reduction stage; checks each accumulated sum, the log2(LANES)+1 latency
// and that back-to-back single-vector groups give one result per cycle.
module folded_reduce_tb;
  import rnn_pkg::*;

  localparam int LANES = 16;
  localparam int LAT   = $clog2(LANES) + 1;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  word_t in_v [LANES];
  logic out_valid;
  word_t out_sum;
  int checks = 0, failures = 0, cyc = 0, n_out = 0, groups = 0;
  int exp_sum [$];
  int exp_cyc [$];
  int last_out_cyc = -100, consecutive = 0, max_consecutive = 0;

  folded_reduce #(.LANES(LANES)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int es, ec;
    n_out++;
    consecutive = (cyc == last_out_cyc + 1) ? consecutive + 1 : 1;
    if (consecutive > max_consecutive) max_consecutive = consecutive;
    last_out_cyc = cyc;
    checks += 2;
    es = exp_sum.pop_front();
    ec = exp_cyc.pop_front();
    if (int'(out_sum) != es) begin failures++; $display("FAIL sum %0d exp %0d", int'(out_sum), es); end
    if (cyc - ec != LAT - 1) begin failures++; $display("FAIL latency %0d", cyc - ec + 1); end
  end

  task automatic run_group(input int len);
    int s = 0;
    for (int v = 0; v < len; v++) begin
      @(negedge clk);
      in_valid = 1; in_first = (v == 0); in_last = (v == len - 1);
      for (int l = 0; l < LANES; l++) begin
        in_v[l] = $urandom;
        s += int'(in_v[l]);
      end
    end
    exp_sum.push_back(s);
    exp_cyc.push_back(cyc + 1);
    groups++;
  endtask

  initial begin
    for (int l = 0; l < LANES; l++) in_v[l] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 200; g++) begin
      run_group(1 + $urandom_range(0, 6));
      if ($urandom_range(0, 2) == 0) begin @(negedge clk); in_valid = 0; in_first = 0; in_last = 0; end
    end
    for (int g = 0; g < 32; g++) run_group(1);
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    repeat (LAT + 3) @(negedge clk);
    checks += 2;
    if (n_out != groups) begin failures++; $display("FAIL count %0d of %0d", n_out, groups); end
    if (max_consecutive < 32) begin failures++; $display("FAIL rate: %0d", max_consecutive); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// ru_reduce_tb: random inputs every cycle (with gaps) through an 8-input
// tree; checks sums, the clog2(8) = 3 cycle latency and full throughput.
module ru_reduce_tb;
  import rnn_pkg::*;

  localparam int N   = 8;
  localparam int LAT = 3;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  word_t in_v [N];
  word_t out_sum;
  int checks = 0, failures = 0, cyc = 0, sent = 0, got = 0;
  int exp_sum [$];
  int exp_cyc [$];

  ru_reduce #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int es, ec;
    got++;
    checks += 2;
    es = exp_sum.pop_front();
    ec = exp_cyc.pop_front();
    if (int'(out_sum) != es) begin failures++; $display("FAIL sum"); end
    if (cyc - ec != LAT - 1) begin failures++; $display("FAIL latency %0d", cyc - ec + 1); end
  end

  initial begin
    for (int i = 0; i < N; i++) in_v[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0) || k < 50;
      if (in_valid) begin
        automatic int s = 0;
        for (int i = 0; i < N; i++) begin in_v[i] = $urandom; s += int'(in_v[i]); end
        exp_sum.push_back(s);
        exp_cyc.push_back(cyc + 1);
        sent++;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (got != sent) begin failures++; $display("FAIL count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// pcu_tb: streams random dot-product groups (1..5 vectors each, with and
// without idle cycles between them) through a 16-lane PCU and checks every
// accumulated sum against an integer model, the latency (4+log2(LANES)
// edges from the sample of the last vector) and the one-vector-per-cycle rate.
module pcu_tb;
  import rnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int LANES = 16;
  localparam int LAT   = 4 + $clog2(LANES);

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  word_t in_w [LANES], in_x [LANES];
  logic out_valid;
  word_t out_sum;
  int checks = 0, failures = 0;
  int cyc = 0;
  longint exp_sum [$];
  int     exp_cyc [$];
  int     n_out = 0;

  pcu #(.LANES(LANES)) dut (.*);

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
    n_out++;
    checks += 2;
    if (exp_sum.size() == 0) begin
      failures += 2;
      $display("FAIL unexpected output");
    end else begin
      longint es; int ec;
      es = exp_sum.pop_front();
      ec = exp_cyc.pop_front();
      if (longint'($signed(out_sum)) != es) begin
        failures++;
        $display("FAIL sum got %0d exp %0d", $signed(out_sum), es);
      end
      if (cyc - ec != LAT - 1) begin
        failures++;
        $display("FAIL latency got %0d exp %0d", cyc - ec + 1, LAT);
      end
    end
  end

  task automatic run_group(input int len, input bit extreme);
    longint s = 0;
    for (int v = 0; v < len; v++) begin
      @(negedge clk);
      in_valid = 1; in_first = (v == 0); in_last = (v == len - 1);
      for (int l = 0; l < LANES; l++) begin
        in_w[l] = extreme ? 32'h80808080 : $urandom;
        in_x[l] = extreme ? 32'h80808080 : $urandom;
        s += word_dot(in_w[l], in_x[l]);
      end
      if (v == len - 1) begin
        exp_sum.push_back(longint'(wrap32(s)));
        exp_cyc.push_back(cyc + 1);
      end
    end
  endtask

  initial begin
    int t0, groups;
    for (int l = 0; l < LANES; l++) begin in_w[l] = '0; in_x[l] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    groups = 0;
    for (int g = 0; g < 300; g++) begin
      run_group(1 + $urandom_range(0, 4), g == 5);
      groups++;
      if ($urandom_range(0, 3) == 0) begin
        @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
      end
    end
    // throughput: 64 single-vector groups back to back -> 64 results in 64 cycles
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    repeat (LAT + 2) @(negedge clk);
    t0 = n_out;
    for (int g = 0; g < 64; g++) begin run_group(1, 0); groups++; end
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    repeat (LAT + 1) @(negedge clk);
    checks++;
    if (n_out - t0 != 64) begin
      // at this point exactly the 64 results must have come out, one per cycle
      failures++;
      $display("FAIL rate: %0d results", n_out - t0);
    end
    repeat (4) @(negedge clk);
    checks++;
    if (n_out != groups || exp_sum.size() != 0) begin
      failures++;
      $display("FAIL count %0d of %0d", n_out, groups);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

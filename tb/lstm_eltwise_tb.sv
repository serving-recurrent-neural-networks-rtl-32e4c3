// lstm_eltwise_tb: random gate dot products, biases and previous cell
// states, one per cycle and with gaps. Checks c, h and the 8-bit h of every
// result bit-exactly against the integer reference cell, h and c against
// the real-valued LSTM equations (loose tolerance, catching gross errors
// such as swapped gates), and the 5-cycle latency.
module lstm_eltwise_tb;
  import rnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int LAT = 5;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [15:0] in_tag = '0, out_tag;
  logic signed [31:0] in_dot [4], in_bias [4], in_c, out_c, out_h;
  logic signed [7:0] out_h8;
  int checks = 0, failures = 0, cyc = 0, sent = 0, got = 0;
  cell_out_t exp_q [$];
  int exp_cyc [$];
  real exp_rh [$], exp_rc [$];

  lstm_eltwise #(.TAG_W(16)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sig(input real v); return 1.0 / (1.0 + $exp(-v)); endfunction
  function automatic real th(input real v); return 2.0 * sig(2.0 * v) - 1.0; endfunction

  always @(negedge clk) if (rst_n && out_valid) begin
    cell_out_t e; int ec; real rh, rc;
    got++;
    e = exp_q.pop_front(); ec = exp_cyc.pop_front();
    rh = exp_rh.pop_front(); rc = exp_rc.pop_front();
    checks += 6;
    if (longint'(out_c) != e.c)  begin failures++; $display("FAIL c %0d exp %0d", out_c, e.c); end
    if (longint'(out_h) != e.h)  begin failures++; $display("FAIL h %0d exp %0d", out_h, e.h); end
    if (int'(out_h8) != e.h8)    begin failures++; $display("FAIL h8 %0d exp %0d", out_h8, e.h8); end
    if (cyc - ec != LAT - 1)     begin failures++; $display("FAIL latency"); end
    if ((real'(out_h) / 65536.0 - rh) > 0.1 || (rh - real'(out_h) / 65536.0) > 0.1) begin
      failures++; $display("FAIL h accuracy %f vs %f", real'(out_h) / 65536.0, rh);
    end
    if ((real'(out_c) / 65536.0 - rc) > 0.15 || (rc - real'(out_c) / 65536.0) > 0.15) begin
      failures++; $display("FAIL c accuracy %f vs %f", real'(out_c) / 65536.0, rc);
    end
  end

  initial begin
    for (int g = 0; g < 4; g++) begin in_dot[g] = 0; in_bias[g] = 0; end
    in_c = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      if (in_valid) begin
        longint d [4], b [4];
        real pre [4], rc;
        for (int g = 0; g < 4; g++) begin
          // pre-activations mostly within +-6 (Q13)
          in_dot[g]  = $signed($urandom_range(0, 2 * 40000)) - 40000;
          in_bias[g] = $signed($urandom_range(0, 2 * 9000)) - 9000;
          d[g] = in_dot[g]; b[g] = in_bias[g];
          pre[g] = real'(d[g] + b[g]) / 8192.0;
        end
        in_c = $signed($urandom_range(0, 2 * 3 * 65536)) - 3 * 65536;
        exp_q.push_back(ref_cell(d, b, longint'(in_c)));
        exp_cyc.push_back(cyc + 1);
        rc = sig(pre[2]) * (real'(in_c) / 65536.0) + sig(pre[0]) * th(pre[1]);
        exp_rc.push_back(rc);
        exp_rh.push_back(sig(pre[3]) * th(rc));
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

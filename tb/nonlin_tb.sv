// nonlin_tb: sweeps sigma and tanh over -12..12 (and random 32-bit inputs)
// and checks each result bit-exactly against the piecewise-linear reference
// and within 0.02 (sigma) / 0.04 (tanh) of the exact real-valued functions.
module nonlin_tb;
  import rnn_pkg::*;
  import tb_ref_pkg::*;

  act_e mode;
  logic signed [31:0] x, y;
  int checks = 0, failures = 0;

  nonlin dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input longint xv);
    real xr, yr, er, tol;
    x = 32'(xv);
    for (int m = 0; m < 2; m++) begin
      mode = act_e'(m);
      #1;
      xr = real'(xv) / 65536.0;
      if (m == 0) begin
        er  = 1.0 / (1.0 + $exp(-xr));
        tol = 0.02;
        checks++;
        if (longint'(y) != ref_sigmoid(xv)) begin failures++; $display("FAIL sig x=%0d y=%0d", xv, y); end
      end else begin
        er  = (xr > 20.0) ? 1.0 : (xr < -20.0) ? -1.0 : ($exp(2.0*xr) - 1.0) / ($exp(2.0*xr) + 1.0);
        tol = 0.04;
        checks++;
        if (longint'(y) != ref_tanh(xv)) begin failures++; $display("FAIL tanh x=%0d y=%0d", xv, y); end
      end
      yr = real'(y) / 65536.0;
      checks++;
      if (yr - er > tol || er - yr > tol) begin
        failures++; $display("FAIL accuracy mode %0d x=%f y=%f exact=%f", m, xr, yr, er);
      end
    end
  endtask

  initial begin
    for (longint v = -12 * 65536; v <= 12 * 65536; v += 97) one(v);
    one(-64'sd2147483648); one(64'sd2147483647);
    for (int n = 0; n < 2000; n++) one(longint'($signed($urandom)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

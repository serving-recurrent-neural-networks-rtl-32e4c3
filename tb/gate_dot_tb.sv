// gate_dot_tb: a small gate MapReduce (RU=2 PCUs of 4 lanes, 2 PMUs of 8
// rows each) computes 5 dot products of a random int8 weight matrix with a
// random 80-element vector padded to 3 chunks of 32. The rows cross the
// boundary between the two PMUs. Checks every dot product against an
// integer model, the latency 1 + (4+log2 LANES) + clog2(RU) = 8 edges and
// that the products leave back to back, every NCH cycles.
module gate_dot_tb;
  import rnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int RU = 2, LANES = 4, PMUS = 2, PMU_DEPTH = 8;
  localparam int RAW = $clog2(PMUS * PMU_DEPTH);
  localparam int R = 80, CH = 4 * LANES * RU, NCH = (R + CH - 1) / CH, K = 5;
  localparam int LAT = 1 + 4 + $clog2(LANES) + $clog2(RU);

  logic clk = 0, rst_n = 0;
  logic rd_valid = 0, rd_first = 0, rd_last = 0;
  logic [RAW-1:0] rd_row = '0;
  word_t vec [RU][LANES];
  logic wr_en = 0;
  logic [0:0] wr_pcu = '0;
  logic [RAW-1:0] wr_row = '0;
  word_t wr_data [LANES];
  logic out_valid;
  word_t out_dot;

  logic signed [7:0] W [K][NCH*CH];
  logic signed [7:0] V [NCH*CH];
  int checks = 0, failures = 0, cyc = 0, got = 0;
  int exp_cyc [$];
  longint exp_dot [$];
  int last_out = -1;

  gate_dot #(.RU(RU), .LANES(LANES), .PMUS(PMUS), .PMU_DEPTH(PMU_DEPTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t pack(input int k, input int e0, input bit is_vec);
    word_t w;
    for (int b = 0; b < 4; b++) w[8*b +: 8] = is_vec ? V[e0 + b] : W[k][e0 + b];
    return w;
  endfunction

  int prev_c = 0;
  task automatic set_vec(input int c);
    for (int r = 0; r < RU; r++)
      for (int l = 0; l < LANES; l++)
        vec[r][l] = pack(0, (c * RU + r) * 4 * LANES + 4 * l, 1);
  endtask

  always @(negedge clk) if (rst_n && out_valid) begin
    int ec; longint ed;
    got++;
    ec = exp_cyc.pop_front(); ed = exp_dot.pop_front();
    checks += 2;
    if (longint'($signed(out_dot)) != ed) begin failures++; $display("FAIL dot %0d exp %0d", $signed(out_dot), ed); end
    if (cyc - ec != LAT - 1) begin failures++; $display("FAIL latency %0d", cyc - ec + 1); end
    if (last_out >= 0) begin
      checks++;
      if (cyc - last_out != NCH) begin failures++; $display("FAIL spacing %0d", cyc - last_out); end
    end
    last_out = cyc;
  end

  initial begin
    for (int l = 0; l < LANES; l++) begin wr_data[l] = '0; for (int r = 0; r < RU; r++) vec[r][l] = '0; end
    for (int e = 0; e < NCH * CH; e++) begin
      V[e] = (e < R) ? 8'($urandom) : 8'sd0;
      for (int k = 0; k < K; k++) W[k][e] = (e < R) ? 8'($urandom) : 8'sd0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load weights: PCU r, row k*NCH+c <- W[k][(c*RU+r)*4*LANES ...]
    for (int k = 0; k < K; k++)
      for (int c = 0; c < NCH; c++)
        for (int r = 0; r < RU; r++) begin
          @(negedge clk);
          wr_en = 1; wr_pcu = 1'(r); wr_row = RAW'(k * NCH + c);
          for (int l = 0; l < LANES; l++) wr_data[l] = pack(k, (c * RU + r) * 4 * LANES + 4 * l, 0);
        end
    @(negedge clk); wr_en = 0;
    // issue K x NCH chunks back to back; vec follows one cycle later
    for (int k = 0; k < K; k++) begin
      automatic longint s = 0;
      for (int e = 0; e < NCH * CH; e += 4) s += word_dot(pack(k, e, 0), pack(0, e, 1));
      for (int c = 0; c < NCH; c++) begin
        @(negedge clk);
        set_vec(prev_c);
        prev_c = c;
        rd_valid = 1; rd_first = (c == 0); rd_last = (c == NCH - 1);
        rd_row = RAW'(k * NCH + c);
        if (c == NCH - 1) begin exp_dot.push_back(longint'(wrap32(s))); exp_cyc.push_back(cyc + 1); end
      end
    end
    @(negedge clk); rd_valid = 0; rd_first = 0; rd_last = 0;
    set_vec(prev_c);
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (got != K) begin failures++; $display("FAIL count %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// lstm1_unit_tb: one LSTM-1 engine (UNIT 1 of HU = 2, RU = 2 PCUs of 4 lanes
// per gate, two 4-row weight PMUs per PCU) driven directly by the testbench
// as loop controller and vector source. H = 7, D = 40: the unit owns hidden
// elements 1, 3, 5 (and 7, which must be suppressed); R = 47 is padded to
// two chunks of 32. Two steps: the first with the cell state cleared, the
// second carrying it over. Checks the 8-bit h, h_q16 and c_q16 of each element
// against the integer reference cell, the element index, the masking and
// the latency from the last chunk to h_valid (14 edges here).
module lstm1_unit_tb;
  import rnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int UNIT = 1, HU = 2, RU = 2, LANES = 4, PMUS = 2, PMU_DEPTH = 4, MAX_K = 8;
  localparam int RAW = $clog2(PMUS * PMU_DEPTH), KW = $clog2(MAX_K);
  localparam int H = 7, D = 40, R = H + D, CH = 4 * LANES * RU, NCH = (R + CH - 1) / CH;
  localparam int KIT = (H + HU - 1) / HU;
  localparam int LAT = 1 + 4 + $clog2(LANES) + $clog2(RU) + 1 + 5;

  logic clk = 0, rst_n = 0;
  logic [15:0] cfg_h = 16'(H);
  logic step_start = 0, clear_c = 0;
  logic rd_valid = 0, rd_first = 0, rd_last = 0;
  logic [RAW-1:0] rd_row = '0;
  word_t vec [RU][LANES];
  logic w_en = 0;
  logic [1:0] w_gate = '0;
  logic [0:0] w_pcu = '0;
  logic [RAW-1:0] w_row = '0;
  word_t w_data [LANES];
  logic b_en = 0;
  logic [1:0] b_gate = '0;
  logic [KW-1:0] b_idx = '0;
  logic signed [31:0] b_data = '0;
  logic h_valid;
  logic [15:0] h_idx;
  logic signed [7:0] h8;
  logic signed [31:0] h_q16, c_q16;

  lstm1_unit #(.UNIT(UNIT), .HU(HU), .RU(RU), .LANES(LANES), .PMUS(PMUS),
               .PMU_DEPTH(PMU_DEPTH), .MAX_K(MAX_K)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic signed [7:0] W [4][KIT][NCH*CH];
  longint B [4][KIT];
  logic signed [7:0] V [NCH*CH];
  longint Cs [KIT];
  cell_out_t exp_q [$];
  int exp_n [$];
  int exp_cyc [$];
  int checks = 0, failures = 0, got = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && h_valid) begin
    cell_out_t e; int en, ec;
    got++;
    checks += 5;
    if (exp_q.size() == 0) begin failures += 5; $display("FAIL unexpected h"); end
    else begin
      e = exp_q.pop_front(); en = exp_n.pop_front(); ec = exp_cyc.pop_front();
      if (int'(h_idx) != en)         begin failures++; $display("FAIL idx %0d exp %0d", h_idx, en); end
      if (int'(h8) != e.h8)          begin failures++; $display("FAIL h8 %0d exp %0d", h8, e.h8); end
      if (longint'(h_q16) != e.h)    begin failures++; $display("FAIL h %0d exp %0d", h_q16, e.h); end
      if (longint'(c_q16) != e.c)    begin failures++; $display("FAIL c %0d exp %0d", c_q16, e.c); end
      if (cyc - ec != LAT - 1)       begin failures++; $display("FAIL latency %0d", cyc - ec + 1); end
    end
  end

  function automatic word_t pk(input int g, input int k, input int e0, input bit is_vec);
    word_t w;
    for (int b = 0; b < 4; b++) w[8*b +: 8] = is_vec ? V[e0 + b] : W[g][k][e0 + b];
    return w;
  endfunction

  task automatic set_vec(input int c);
    for (int r = 0; r < RU; r++)
      for (int l = 0; l < LANES; l++) vec[r][l] = pk(0, 0, (c * RU + r) * 4 * LANES + 4 * l, 1);
  endtask

  initial begin
    for (int l = 0; l < LANES; l++) begin w_data[l] = '0; for (int r = 0; r < RU; r++) vec[r][l] = '0; end
    for (int g = 0; g < 4; g++)
      for (int k = 0; k < KIT; k++) begin
        for (int e = 0; e < NCH * CH; e++) W[g][k][e] = (e < R) ? 8'($signed($urandom_range(0, 80)) - 40) : 8'sd0;
        B[g][k] = longint'($signed($urandom_range(0, 30000))) - 15000;
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 4; g++)
      for (int r = 0; r < RU; r++)
        for (int k = 0; k < KIT; k++)
          for (int c = 0; c < NCH; c++) begin
            @(negedge clk);
            w_en = 1; w_gate = 2'(g); w_pcu = 1'(r); w_row = RAW'(k * NCH + c);
            for (int l = 0; l < LANES; l++) w_data[l] = pk(g, k, (c * RU + r) * 4 * LANES + 4 * l, 0);
          end
    @(negedge clk); w_en = 0;
    for (int g = 0; g < 4; g++)
      for (int k = 0; k < KIT; k++) begin
        @(negedge clk);
        b_en = 1; b_gate = 2'(g); b_idx = KW'(k); b_data = 32'(B[g][k]);
      end
    @(negedge clk); b_en = 0;
    for (int t = 0; t < 2; t++) begin
      int prev_c;
      for (int e = 0; e < NCH * CH; e++) V[e] = (e < R) ? 8'($urandom) : 8'sd0;
      @(negedge clk); step_start = 1; clear_c = (t == 0);
      @(negedge clk); step_start = 0;
      prev_c = 0;
      for (int k = 0; k < KIT; k++) begin
        longint dot [4], bias [4];
        cell_out_t co;
        for (int g = 0; g < 4; g++) begin
          automatic longint s = 0;
          for (int e = 0; e < NCH * CH; e += 4) s += word_dot(pk(g, k, e, 0), pk(0, 0, e, 1));
          dot[g] = longint'(wrap32(s));
          bias[g] = B[g][k];
        end
        co = ref_cell(dot, bias, (t == 0) ? 64'sd0 : Cs[k]);
        Cs[k] = co.c;
        for (int c = 0; c < NCH; c++) begin
          @(negedge clk);
          set_vec(prev_c);
          prev_c = c;
          rd_valid = 1; rd_first = (c == 0); rd_last = (c == NCH - 1); rd_row = RAW'(k * NCH + c);
        end
        if (k * HU + UNIT < H) begin
          exp_q.push_back(co); exp_n.push_back(k * HU + UNIT); exp_cyc.push_back(cyc + 1);
        end
      end
      @(negedge clk); rd_valid = 0; rd_first = 0; rd_last = 0; set_vec(prev_c);
      repeat (LAT + 4) @(negedge clk);
    end
    checks++;
    if (got != 2 * 3 || exp_q.size() != 0) begin failures++; $display("FAIL count %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

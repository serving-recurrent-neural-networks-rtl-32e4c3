// rnn_full_size_tb: the end-to-end LSTM test run on the engine at its
// default size (4 LSTM-1 units x 4 gates x 8 PCUs of 16 lanes, 3 x 84 kB
// weight PMUs per PCU), for the smallest LSTM size of the benchmark set the
// engine is sized for: H = D = 256, two time steps. Apart from the sizes it
// is the same test as rnn_serving_top_tb:
//
// Loads random int8 weights, biases and inputs, runs several LSTM time steps
// per configuration and compares every h_t element that the engine streams
// out with an integer reference model of the same arithmetic. The hidden
// state is fed back through the engine's own double buffer, so step t+1 only
// matches if step t's h went to the right place. Also checks each step's
// length against ceil(H/HU)*NCH issue cycles plus the fixed pipeline latency
// and counts the mechanisms exercised: chunk accumulation (NCH > 1), back to
// back single-chunk iterations (NCH = 1), masked hidden elements (H not a
// multiple of HU), zero padding of the last chunk, weight rows in a second
// PMU, cell-state reset and carry-over, saturated gates.
module rnn_full_size_tb;
  import rnn_pkg::*;
  import tb_ref_pkg::*;

  // the engine's defaults
  localparam int HU = 4, RU = 8, LANES = 16, PMUS = 3, PMU_DEPTH = 1344;
  localparam int MAX_H = 2048, MAX_R = 4096;
  localparam int NCFG = 1;
  localparam int CFG_H [NCFG] = '{256};
  localparam int CFG_D [NCFG] = '{256};
  localparam int T_STEPS = 2;
  localparam int WMAX = 16;           // weight magnitude bound

  localparam int MAX_K = (MAX_H + HU - 1) / HU;
  localparam int RAW = $clog2(PMUS * PMU_DEPTH);
  localparam int RUW = (RU > 1) ? $clog2(RU) : 1;
  localparam int HUW = (HU > 1) ? $clog2(HU) : 1;
  localparam int KW  = (MAX_K > 1) ? $clog2(MAX_K) : 1;
  localparam int WAW = $clog2(MAX_R / 4);
  localparam int CH  = 4 * LANES * RU;
  localparam int PIPE = 1 + (4 + $clog2(LANES)) + ((RU > 1) ? $clog2(RU) : 1) + 1 + 5;

  logic clk = 0, rst_n = 0;
  logic [15:0] cfg_h = '0, cfg_d = '0;
  logic start = 0, clear_c = 0, busy, done;
  logic [31:0] step_cycles;
  logic hv_en = 0;
  logic [WAW-1:0] hv_addr = '0;
  logic [3:0] hv_be = '0;
  word_t hv_data = '0;
  logic w_en = 0;
  logic [HUW-1:0] w_unit = '0;
  logic [1:0] w_gate = '0;
  logic [RUW-1:0] w_pcu = '0;
  logic [RAW-1:0] w_row = '0;
  word_t w_data [LANES];
  logic b_en = 0;
  logic [HUW-1:0] b_unit = '0;
  logic [1:0] b_gate = '0;
  logic [KW-1:0] b_idx = '0;
  logic signed [31:0] b_data = '0;
  logic h_valid [HU];
  logic [15:0] h_idx [HU];
  logic signed [7:0] h_data [HU];

  rnn_serving_top dut (.*);

  always #5 clk = ~clk;

  // reference state
  logic signed [7:0] W [4][MAX_H][MAX_R];
  longint            B [4][MAX_H];
  logic signed [7:0] X [MAX_R];
  logic signed [7:0] Hs [MAX_H];
  longint            Cs [MAX_H];
  int                exp_h8 [MAX_H];
  bit                seen [MAX_H];

  int checks = 0, failures = 0;
  int n_multi_chunk = 0, n_single_chunk = 0, n_masked = 0, n_padded = 0;
  int n_pmu2 = 0, n_clear = 0, n_carry = 0, n_sat = 0, n_outputs = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // collect streamed h outputs
  always @(negedge clk) if (rst_n) begin
    for (int u = 0; u < HU; u++) if (h_valid[u]) begin
      int n;
      n = int'(h_idx[u]);
      n_outputs++;
      checks++;
      if (n >= int'(cfg_h) || seen[n] || (n % HU) != u) begin
        failures++; $display("FAIL bad output index %0d from unit %0d", n, u);
      end else begin
        seen[n] = 1;
        if (int'(h_data[u]) != exp_h8[n]) begin
          failures++;
          if (failures < 20) $display("FAIL h[%0d] got %0d exp %0d", n, h_data[u], exp_h8[n]);
        end
      end
    end
  end

  task automatic host_write_byte_region(input int first, input int last, input bit is_x);
    // write bytes first..last of the next buffer (x or h region), word by word
    for (int a = first / 4; a <= last / 4; a++) begin
      @(negedge clk);
      hv_en = 1; hv_addr = WAW'(a); hv_be = '0; hv_data = '0;
      for (int b = 0; b < 4; b++) begin
        int e;
        e = 4 * a + b;
        if (e >= first && e <= last) begin
          hv_be[b] = 1'b1;
          hv_data[8*b +: 8] = is_x ? X[e] : Hs[e - int'(cfg_d)];
        end
      end
    end
    @(negedge clk); hv_en = 0;
  endtask

  task automatic load_model(input int h, input int d);
    int r, nch, kit;
    r = h + d; nch = (r + CH - 1) / CH; kit = (h + HU - 1) / HU;
    for (int g = 0; g < 4; g++)
      for (int n = 0; n < h; n++) begin
        for (int e = 0; e < r; e++) W[g][n][e] = 8'($signed($urandom_range(0, 2 * WMAX)) - WMAX);
        B[g][n] = longint'($signed($urandom_range(0, 80000))) - 40000;
      end
    // weights
    for (int u = 0; u < HU; u++)
      for (int g = 0; g < 4; g++)
        for (int rr = 0; rr < RU; rr++)
          for (int k = 0; k < kit; k++)
            for (int c = 0; c < nch; c++) begin
              int n;
              n = k * HU + u;
              @(negedge clk);
              w_en = 1; w_unit = HUW'(u); w_gate = 2'(g); w_pcu = RUW'(rr); w_row = RAW'(k * nch + c);
              if (k * nch + c >= PMU_DEPTH) n_pmu2++;
              for (int l = 0; l < LANES; l++)
                for (int b = 0; b < 4; b++) begin
                  int e;
                  e = (c * RU + rr) * 4 * LANES + 4 * l + b;
                  w_data[l][8*b +: 8] = (n < h && e < r) ? W[g][n][e] : 8'sd0;
                end
            end
    @(negedge clk); w_en = 0;
    // biases
    for (int u = 0; u < HU; u++)
      for (int g = 0; g < 4; g++)
        for (int k = 0; k < kit; k++) begin
          @(negedge clk);
          b_en = 1; b_unit = HUW'(u); b_gate = 2'(g); b_idx = KW'(k);
          b_data = (k * HU + u < h) ? 32'(B[g][k * HU + u]) : 32'sd0;
        end
    @(negedge clk); b_en = 0;
  endtask

  task automatic run_config(input int h, input int d);
    int r, nch, kit;
    r = h + d; nch = (r + CH - 1) / CH; kit = (h + HU - 1) / HU;
    @(negedge clk);
    cfg_h = 16'(h); cfg_d = 16'(d);
    load_model(h, d);
    // initial hidden state h_{-1}: random, written into the h region
    for (int n = 0; n < h; n++) Hs[n] = 8'($urandom);
    host_write_byte_region(d, d + h - 1, 0);
    for (int t = 0; t < T_STEPS; t++) begin
      // next input x_t into the x region of the idle buffer
      for (int e = 0; e < d; e++) X[e] = 8'($urandom);
      host_write_byte_region(0, d - 1, 1);
      // reference step
      for (int n = 0; n < h; n++) begin
        longint dot [4], bias [4];
        cell_out_t co;
        for (int g = 0; g < 4; g++) begin
          longint s = 0;
          for (int e = 0; e < nch * CH; e += 4) begin
            int wv, xv;
            for (int b = 0; b < 4; b++) begin
              wv[8*b +: 8] = (e + b < r) ? W[g][n][e + b] : 8'sd0;
              xv[8*b +: 8] = (e + b < d) ? X[e + b] : (e + b < r) ? Hs[e + b - d] : 8'sd0;
            end
            s += word_dot(wv, xv);
          end
          dot[g] = longint'(wrap32(s));
          bias[g] = B[g][n];
          if (dot[g] + bias[g] > 5 * 8192 || dot[g] + bias[g] < -5 * 8192) n_sat++;
        end
        co = ref_cell(dot, bias, (t == 0) ? 64'sd0 : Cs[n]);
        Cs[n] = co.c;
        exp_h8[n] = co.h8;
        seen[n] = 0;
      end
      // run the step
      @(negedge clk);
      start = 1; clear_c = (t == 0);
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      for (int n = 0; n < h; n++) begin
        check(seen[n], $sformatf("h[%0d] not produced (H=%0d t=%0d)", n, h, t));
        Hs[n] = 8'(exp_h8[n]);
      end
      check(int'(step_cycles) == kit * nch + PIPE + 1,
            $sformatf("step length %0d, expected %0d", step_cycles, kit * nch + PIPE + 1));
      if (nch > 1) n_multi_chunk++;
      if (nch == 1) n_single_chunk++;
      if (kit * HU > h) n_masked++;
      if (nch * CH > r) n_padded++;
      if (t == 0) n_clear++; else n_carry++;
    end
  endtask

  initial begin
    for (int l = 0; l < LANES; l++) w_data[l] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NCFG; i++) run_config(CFG_H[i], CFG_D[i]);
    $display("mechanisms: multi_chunk=%0d single_chunk=%0d masked=%0d padded=%0d pmu2=%0d clear=%0d carry=%0d saturated_gates=%0d outputs=%0d",
             n_multi_chunk, n_single_chunk, n_masked, n_padded, n_pmu2, n_clear, n_carry, n_sat, n_outputs);
    check(n_outputs == 256 * T_STEPS, "number of h outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

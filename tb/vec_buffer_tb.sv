// vec_buffer_tb: fills the idle half with host word writes (random byte
// enables) and hidden-state byte writes, swaps, and reads every chunk back
// while the other half is being rewritten; compares with a byte-array model
// of both halves and checks the one-cycle read latency and the chunk layout.
module vec_buffer_tb;
  import rnn_pkg::*;

  localparam int RU = 2, LANES = 4, HU = 2, MAX_R = 256;
  localparam int NW = MAX_R / 4, WAW = $clog2(NW), BAW = $clog2(MAX_R);
  localparam int CH = 4 * LANES * RU;
  localparam int CHW = $clog2((MAX_R + CH - 1) / CH) + 1;

  logic clk = 0, rst_n = 0, swap = 0, cur_sel;
  logic rd_en = 0;
  logic [CHW-1:0] rd_chunk = '0;
  word_t rd_vec [RU][LANES];
  logic hw_en = 0;
  logic [WAW-1:0] hw_addr = '0;
  logic [3:0] hw_be = '0;
  word_t hw_data = '0;
  logic [HU-1:0] h_en = '0;
  logic [BAW-1:0] h_pos [HU];
  logic [7:0] h_data [HU];
  logic [7:0] model [2][MAX_R];
  int checks = 0, failures = 0;
  bit mcur = 0;

  vec_buffer #(.RU(RU), .LANES(LANES), .HU(HU), .MAX_R(MAX_R)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one cycle: optional host write + HU h writes into the idle half, optional read
  task automatic cycle(input bit do_read, input int chunk, input bit do_writes);
    @(negedge clk);
    hw_en = do_writes; hw_addr = WAW'($urandom); hw_be = 4'($urandom); hw_data = $urandom;
    if (do_writes)
      for (int b = 0; b < 4; b++) if (hw_be[b]) model[!mcur][4 * hw_addr + b] = hw_data[8*b +: 8];
    for (int u = 0; u < HU; u++) begin
      h_en[u] = do_writes && ($urandom_range(0, 1) == 1);
      h_pos[u] = BAW'(2 * $urandom_range(0, MAX_R / 2 - 1) + u);  // distinct bytes per port
      h_data[u] = 8'($urandom);
      if (h_en[u]) model[!mcur][h_pos[u]] = h_data[u];
    end
    rd_en = do_read; rd_chunk = CHW'(chunk);
    if (do_read) begin
      @(negedge clk);
      hw_en = 0; h_en = '0; rd_en = 0;
      for (int r = 0; r < RU; r++)
        for (int l = 0; l < LANES; l++)
          for (int b = 0; b < 4; b++) begin
            checks++;
            if (rd_vec[r][l][8*b +: 8] != model[mcur][(chunk * RU + r) * 4 * LANES + 4 * l + b]) begin
              failures++;
              $display("FAIL chunk %0d r %0d l %0d b %0d", chunk, r, l, b);
            end
          end
    end
  endtask

  initial begin
    for (int u = 0; u < HU; u++) begin h_pos[u] = '0; h_data[u] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill both halves completely
    for (int half = 0; half < 2; half++) begin
      for (int a = 0; a < NW; a++) begin
        @(negedge clk);
        hw_en = 1; hw_addr = WAW'(a); hw_be = 4'hf; hw_data = $urandom;
        for (int b = 0; b < 4; b++) model[!mcur][4 * a + b] = hw_data[8*b +: 8];
      end
      @(negedge clk); hw_en = 0; swap = 1; mcur = !mcur;
      @(negedge clk); swap = 0;
    end
    for (int round = 0; round < 6; round++) begin
      for (int n = 0; n < 200; n++) cycle(0, 0, 1);
      @(negedge clk); swap = 1; mcur = !mcur;
      @(negedge clk); swap = 0;
      checks++;
      if (cur_sel != mcur) begin failures++; $display("FAIL cur_sel"); end
      for (int c = 0; c < MAX_R / CH; c++) cycle(1, c, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

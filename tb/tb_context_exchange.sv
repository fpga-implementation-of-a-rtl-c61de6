// tb_context_exchange: the exchange unit with a real context store and a
// model of the NX idle L1 buffers (port B, two-cycle read latency).
// Sequence: load row 0 (never stored: must arrive as zeros); fill the idle
// buffers with a pattern and exchange (write back row 0, load row 1: zeros
// again); fill with a second pattern and exchange (write back row 1, load
// row 0: the first pattern must come back). The result stream must carry
// exactly the written-back words with their context and word numbers, and
// nothing when res_en is low.
module tb_context_exchange;
  localparam int unsigned NX = 4, NY = 4, WORDS = 32, XW = 2, YW = 2, AW = 5, CW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, wb_en, busy, cs_we, res_en, res_valid;
  logic [YW-1:0] wb_row, ld_row;
  logic [AW-1:0] l1_addr, cs_word, res_word;
  logic [NX-1:0] l1_we;
  logic [63:0] l1_wdata, cs_wdata, cs_rdata, res_data;
  logic [63:0] l1_rdata [NX];
  logic [CW-1:0] cs_ctx, res_ctx;

  context_exchange #(.NX(NX), .NY(NY), .WORDS(WORDS), .WIDTH(64)) dut (.*);
  context_store #(.NCTX(NX * NY), .WORDS(WORDS), .WIDTH(64)) store (
    .clk, .ctx(cs_ctx), .word(cs_word), .we(cs_we), .wdata(cs_wdata), .rdata(cs_rdata));

  // L1 port B model
  logic [63:0] buf_m [NX][WORDS];
  logic [63:0] q1 [NX], q2 [NX];
  always_ff @(posedge clk) begin
    for (int x = 0; x < NX; x++) begin
      if (l1_we[x]) buf_m[x][l1_addr] <= l1_wdata;
      q1[x] <= buf_m[x][l1_addr];
      q2[x] <= q1[x];
    end
  end
  assign l1_rdata = q2;

  int checks = 0, failures = 0;
  int n_res = 0;
  logic [63:0] exp_res [int];
  always @(posedge clk) begin
    if (rst_n && res_valid) begin
      int a;
      a = int'(res_ctx) * WORDS + int'(res_word);
      n_res++;
      checks++;
      if (!res_en || !exp_res.exists(a) || exp_res[a] !== res_data) begin
        failures++;
        if (failures < 10) $display("result ctx %0d word %0d = %h unexpected", res_ctx, res_word, res_data);
      end
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic exchange(bit wb, int wr, int lr);
    @(negedge clk); start = 1; wb_en = wb; wb_row = YW'(wr); ld_row = YW'(lr);
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  task automatic expect_bufs(logic [63:0] pat [NX][WORDS], bit zero, string what);
    for (int x = 0; x < NX; x++)
      for (int w = 0; w < WORDS; w++) begin
        checks++;
        if (buf_m[x][w] !== (zero ? 64'd0 : pat[x][w])) begin
          failures++;
          if (failures < 10) $display("%s: buffer %0d word %0d = %h", what, x, w, buf_m[x][w]);
        end
      end
  endtask

  logic [63:0] pat0 [NX][WORDS], pat1 [NX][WORDS];

  initial begin
    start = 0; wb_en = 0; wb_row = '0; ld_row = '0; res_en = 1;
    foreach (buf_m[x, w]) buf_m[x][w] = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1: load row 0, never stored
    exchange(0, 0, 0);
    expect_bufs(pat0, 1, "first load");
    // 2: write back pattern 0 as row 0, load row 1
    foreach (pat0[x, w]) begin
      pat0[x][w] = {$urandom, $urandom};
      buf_m[x][w] = pat0[x][w];
      exp_res[(0 * NX + x) * WORDS + w] = pat0[x][w];
    end
    exchange(1, 0, 1);
    expect_bufs(pat0, 1, "load of unstored row 1");
    checks++;
    if (n_res != NX * WORDS) begin failures++; $display("%0d result words", n_res); end
    // 3: write back pattern 1 as row 1 without results, load row 0
    res_en = 0;
    foreach (pat1[x, w]) begin
      pat1[x][w] = {$urandom, $urandom};
      buf_m[x][w] = pat1[x][w];
    end
    exchange(1, 1, 0);
    expect_bufs(pat0, 0, "reload of row 0");
    // 4: write back row 0 again, load row 1 (pattern 1)
    res_en = 1;
    exchange(1, 0, 1);
    expect_bufs(pat1, 0, "reload of row 1");
    checks++;
    if (n_res != 2 * NX * WORDS) begin failures++; $display("%0d result words", n_res); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_corrpe: self-checking test of one CorrPE on its L1 context RAM.
//
// Two pixel contexts are run interleaved, one in each L1 buffer, swapping
// the buffers after every visit as the pixel scheduler does: context 0 is
// an autocorrelation (global = local input), context 1 a cross-correlation
// of two different random bit streams. A reference multi-tau correlator,
// written as queues of pair sums between the blocks and a block schedule
// computed from the modular relations (not from bit patterns), predicts
// every accumulator, delay register, the counter and both monitors; they
// are read back through port B at the end. Enough samples are run for the
// highest block (s = S-1) to receive real data. The length of a visit,
// 2(2P+3)+6 cycles, is checked as well.
module tb_corrpe;
  import corr_pkg::*;

  localparam int unsigned S = 14, P = 8;
  localparam int unsigned WORDS = S * P + S + 2;
  localparam int unsigned AW = $clog2(WORDS);
  localparam int unsigned NSAMP = 24000;     // samples per context
  localparam int unsigned VISIT = 2 * (2 * P + 3) + 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic samp_g, samp_l;
  logic [AW-1:0] m_addr, b_addr;
  logic m_we, b_we, swap, active;
  logic [63:0] m_wdata, m_rdata, b_wdata, b_rdata;

  corrpe #(.S(S), .P(P)) dut (
    .clk, .rst_n, .start, .samp_g(samp_g), .samp_l(samp_l), .busy, .done,
    .m_addr, .m_we, .m_wdata, .m_rdata
  );
  l1_cache #(.WORDS(WORDS), .WIDTH(64)) l1 (
    .clk, .rst_n, .swap, .active,
    .a_addr(m_addr), .a_we(m_we), .a_wdata(m_wdata), .a_rdata(m_rdata),
    .b_addr, .b_we, .b_wdata, .b_rdata
  );

  int checks = 0, failures = 0;

  // ---------------------------------------------------------- reference
  longint unsigned G   [2][S][P];
  int unsigned     hist[2][S][P+1];
  int unsigned     qg  [2][S][$];
  int unsigned     ql  [2][S][$];
  int unsigned     pend_g[2][S], pend_l[2][S];
  bit              pend_v[2][S];
  longint unsigned mon_g[2], mon_l[2];
  longint unsigned cnt[2];
  int unsigned     real_execs[S];

  function automatic int sched_of(longint unsigned c);
    if (c % 2 == 0) return 0;
    if (c % 4 == 3) return 1;
    for (int s = 2; s < 40; s++)
      if (c % (64'd1 << (s + 1)) == (64'd1 << s) - 3) return s;
    return -1;
  endfunction

  task automatic run_block(int x, int s, int unsigned g, int unsigned l);
    for (int p = P; p > 0; p--) hist[x][s][p] = hist[x][s][p-1];
    hist[x][s][0] = l & 32'hFFFF;
    for (int p = 0; p < P; p++) G[x][s][p] += longint'(g) * hist[x][s][p];
    real_execs[s]++;
    if (s + 1 < S) begin
      if (!pend_v[x][s]) begin
        pend_g[x][s] = g; pend_l[x][s] = hist[x][s][P]; pend_v[x][s] = 1;
      end else begin
        qg[x][s+1].push_back((pend_g[x][s] + g) & 32'hFFFF);
        ql[x][s+1].push_back((pend_l[x][s] + hist[x][s][P]) & 32'hFFFF);
        pend_v[x][s] = 0;
      end
    end
  endtask

  task automatic model_sample(int x, int unsigned g, int unsigned l);
    int s;
    run_block(x, 0, g, l);
    s = sched_of(cnt[x] + 1);
    if (s > 0 && s < S && qg[x][s].size() > 0) begin
      if (qg[x][s].size() > 1) begin
        failures++;
        $display("model: block %0d got two pair sums before running", s);
      end
      run_block(x, s, qg[x][s].pop_front(), ql[x][s].pop_front());
    end
    cnt[x] += 2;
    mon_g[x] += longint'(g);
    mon_l[x] += longint'(l);
  endtask

  // ---------------------------------------------------------- stimulus
  int unsigned visit_len;
  int unsigned cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    #(10 * (NSAMP * 2 * (VISIT + 4) + 20000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned t0;
    bit bg, bl;
    start = 0; samp_g = 0; samp_l = 0; swap = 0; b_addr = '0; b_we = 0; b_wdata = '0;
    foreach (G[x, s, p]) G[x][s][p] = 0;
    foreach (hist[x, s, p]) hist[x][s][p] = 0;
    foreach (pend_v[x, s]) pend_v[x][s] = 0;
    foreach (real_execs[s]) real_execs[s] = 0;
    mon_g = '{0, 0}; mon_l = '{0, 0}; cnt = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    // clear both buffers through port B
    for (int b = 0; b < 2; b++) begin
      for (int w = 0; w < WORDS; w++) begin
        @(negedge clk); b_addr = AW'(w); b_we = 1; b_wdata = '0;
      end
      @(negedge clk); b_we = 0; swap = 1;
      @(negedge clk); swap = 0;
    end
    // interleaved visits; buffer 0 holds context 0
    for (int n = 0; n < NSAMP; n++) begin
      for (int x = 0; x < 2; x++) begin
        bg = ($urandom % 100) < 30;
        if (x == 0) bl = bg;
        else        bl = ((($urandom % 100) < 60) ? bg : (($urandom % 100) < 30));
        @(negedge clk); start = 1; samp_g = bg; samp_l = bl; t0 = cyc;
        @(negedge clk); start = 0;
        while (!done) @(negedge clk);
        visit_len = cyc - t0;  // busy cycles, start cycle excluded
        if (n == 0 || n == NSAMP - 1) begin
          checks++;
          if (visit_len != VISIT) begin
            failures++;
            $display("visit took %0d cycles, expected %0d", visit_len, VISIT);
          end
        end
        model_sample(x, 32'(bg), 32'(bl));
        @(negedge clk); swap = 1;
        @(negedge clk); swap = 0;
      end
    end
    // read back: port B sees the buffer that is not active; read it,
    // swap, read the other one.
    for (int k = 0; k < 2; k++) begin
      int x;
      x = active ? 0 : 1;   // port B addresses buffer ~active
      for (int w = 0; w < WORDS; w++) begin
        logic [63:0] exp_w;
        chan_word_t cw;
        @(negedge clk); b_addr = AW'(w); b_we = 0;
        @(negedge clk);
        @(negedge clk);
        if (w < S * P) begin
          cw.unused = '0;
          cw.delay = hist[x][w / P][w % P][15:0];
          cw.acc   = G[x][w / P][w % P][31:0];
          exp_w = cw;
        end else if (w == S * P) exp_w = 64'(cnt[x][31:0]);
        else if (w == S * P + S) exp_w = 64'(mon_g[x][31:0]);
        else if (w == S * P + S + 1) exp_w = 64'(mon_l[x][31:0]);
        else continue;  // hand-over words: internal format
        checks++;
        if (b_rdata !== exp_w) begin
          failures++;
          if (failures < 20)
            $display("ctx %0d word %0d: got %h expected %h", x, w, b_rdata, exp_w);
        end
      end
      @(negedge clk); swap = 1;
      @(negedge clk); swap = 0;
    end
    // every block must have seen real data
    for (int s = 0; s < S; s++) begin
      checks++;
      if (real_execs[s] == 0) begin
        failures++;
        $display("block %0d never received data", s);
      end
    end
    $display("real executions of the highest block: %0d", real_execs[S-1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

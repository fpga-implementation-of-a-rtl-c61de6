// tb_imfcs_top: end-to-end test of the correlator system at reduced size.
//
// A 4x4 sensor, S = 6 blocks of P = 4 channels, short frame period and
// small batches, so that in a short run every mechanism occurs: row
// switches with double-buffered context exchange, waits for the exchange
// (stalls), batches ended by the batch limit and by an empty FIFO, every
// correlator block receiving data, the raw stream and repeated
// (intermediate) result dumps. The sensor is a random bit source. A
// reference multi-tau correlator per pixel (pair-sum queues, schedule from
// the modular relations) is fed from the raw row stream, leaving out rows
// the FIFOs dropped; after the last frame the test waits two full rounds of
// row switches and compares the last dumped context of every pixel word by
// word (accumulators, delay registers, counter, monitors).
module tb_imfcs_top;
  import corr_pkg::*;

  localparam int unsigned NX = 4, NY = 4, S = 6, P = 4;
  localparam int unsigned NFRAMES = 600;
  localparam int unsigned FRAME_CYCLES = 140;
  localparam int unsigned BATCH = 8;
  localparam int unsigned WORDS = S * P + S + 2;
  localparam int unsigned AW = $clog2(WORDS);
  localparam int unsigned YW = $clog2(NY);
  localparam int unsigned CW = $clog2(NX * NY);
  localparam int unsigned NCTX = NX * NY;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic acq_enable, res_enable;
  logic spad_rd; logic [YW-1:0] spad_row; logic [NX-1:0] spad_data;
  logic raw_valid, raw_sof; logic [YW-1:0] raw_row; logic [NX-1:0] raw_data;
  logic res_valid; logic [CW-1:0] res_ctx; logic [AW-1:0] res_word; logic [63:0] res_data;
  logic [31:0] frame_cnt;
  logic fifo_overflow, sched_stall, row_switch;
  logic [YW-1:0] cur_row;

  imfcs_top #(.NX(NX), .NY(NY), .S(S), .P(P), .FIFO_DEPTH(64), .BATCH(BATCH), .FRAME_CYCLES(FRAME_CYCLES)) dut (
    .clk, .rst_n, .acq_enable, .res_enable,
    .spad_rd, .spad_row, .spad_data,
    .raw_valid, .raw_row, .raw_data, .raw_sof,
    .res_valid, .res_ctx, .res_word, .res_data,
    .frame_cnt, .fifo_overflow, .sched_stall, .row_switch, .cur_row
  );

  int checks = 0, failures = 0;

  // ------------------------------------------------ reference correlator
  longint unsigned G    [NCTX][S][P];
  int unsigned     hist [NCTX][S][P+1];
  int unsigned     qg   [NCTX][S][$];
  int unsigned     ql   [NCTX][S][$];
  int unsigned     pend_g[NCTX][S], pend_l[NCTX][S];
  bit              pend_v[NCTX][S];
  longint unsigned mon  [NCTX];
  longint unsigned cnt  [NCTX];
  longint unsigned real_execs[S];

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

  task automatic model_sample(int x, int unsigned v);
    int s;
    run_block(x, 0, v, v);
    s = sched_of(cnt[x] + 1);
    if (s > 0 && s < S && qg[x][s].size() > 0)
      run_block(x, s, qg[x][s].pop_front(), ql[x][s].pop_front());
    cnt[x] += 2;
    mon[x] += longint'(v);
  endtask

  // ------------------------------------------------ sensor model
  // Each pixel fires with its own probability (a few "hot" pixels fire
  // often); the sensor answers a row read one cycle later.
  always_ff @(posedge clk) begin
    if (spad_rd)
      for (int x = 0; x < NX; x++)
        spad_data[x] <= ($urandom % 64) < ((int'(spad_row) * 7 + x * 13) % 40 + 2);
  end
  // ------------------------------------------------ monitors
  int unsigned n_raw_rows = 0, n_raw_frames = 0, n_drop = 0;
  int unsigned n_stall_cycles = 0, n_stalls = 0, n_switch = 0;
  int unsigned n_batch_full = 0, n_batch_empty = 0, n_res_words = 0, n_updates = 0;
  longint unsigned cyc = 0;
  logic [63:0] last_res [NCTX * (2 ** AW)];
  bit          seen     [NCTX * (2 ** AW)];
  bit          stall_q = 0;
  int unsigned batch_cnt = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (raw_valid) begin
        n_raw_rows++;
        if (raw_sof) n_raw_frames++;
        if (fifo_overflow) n_drop++;
        else for (int x = 0; x < NX; x++) model_sample(int'(raw_row) * NX + x, 32'(raw_data[x]));
      end
      if (sched_stall) n_stall_cycles++;
      if (sched_stall && !stall_q) n_stalls++;
      stall_q <= sched_stall;
      if (dut.u_sched.fifo_rd) batch_cnt++;
      if (row_switch) begin
        n_switch++;
        if (batch_cnt >= BATCH) n_batch_full++;
        else                    n_batch_empty++;
        batch_cnt = 0;
      end
      if (res_valid) begin
        int unsigned a;
        a = int'(res_ctx) * (2 ** AW) + int'(res_word);
        n_res_words++;
        if (seen[a] && last_res[a] != res_data) n_updates++;
        last_res[a] = res_data;
        seen[a] = 1;
      end
    end
  end

  // ------------------------------------------------ watchdog
  localparam longint unsigned LIMIT = 64'd2000000;
  initial begin
    wait (cyc >= LIMIT);
    failures++;
    $display("watchdog expired after %0d cycles: frames %0d switches %0d raw %0d", cyc, frame_cnt, n_switch, n_raw_rows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_count(string what, int unsigned n);
    checks++;
    $display("  %-40s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("  ... never happened");
    end
  endtask

  initial begin
    int unsigned sw0;
    foreach (G[x, s, p]) G[x][s][p] = 0;
    foreach (hist[x, s, p]) hist[x][s][p] = 0;
    foreach (pend_v[x, s]) pend_v[x][s] = 0;
    foreach (mon[x]) begin mon[x] = 0; cnt[x] = 0; end
    foreach (real_execs[s]) real_execs[s] = 0;
    foreach (seen[a]) seen[a] = 0;
    acq_enable = 0; res_enable = 1;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(negedge clk) acq_enable = 1;
    wait (frame_cnt == NFRAMES - 1);
    wait (spad_rd);                  // the last frame has started
    @(negedge clk) acq_enable = 0;
    wait (frame_cnt == NFRAMES);
    sw0 = n_switch;
    wait (n_switch >= sw0 + 2 * NY + 1);
    repeat (4 * WORDS) @(posedge clk);   // let the last exchange drain
    $display("finished after %0d cycles", cyc);

    // compare the last dump of every context with the reference
    for (int x = 0; x < int'(NCTX); x++) begin
      for (int w = 0; w < int'(WORDS); w++) begin
        logic [63:0] exp_w;
        chan_word_t cw;
        int unsigned a;
        a = x * (2 ** AW) + w;
        if (w < int'(S * P)) begin
          cw.unused = '0;
          cw.delay  = hist[x][w / P][w % P][15:0];
          cw.acc    = G[x][w / P][w % P][31:0];
          exp_w = cw;
        end else if (w == int'(S * P))         exp_w = 64'(cnt[x][31:0]);
        else if (w >= int'(S * P + S))         exp_w = 64'(mon[x][31:0]);
        else continue;
        checks++;
        if (!seen[a] || last_res[a] !== exp_w) begin
          failures++;
          if (failures < 20)
            $display("pixel %0d word %0d: got %h expected %h (seen %0d)", x, w, last_res[a], exp_w, seen[a]);
        end
      end
    end
    // raw stream
    checks++;
    if (n_raw_frames != NFRAMES || n_raw_rows != NFRAMES * NY) begin
      failures++;
      $display("raw stream: %0d frames %0d rows", n_raw_frames, n_raw_rows);
    end
    $display("mechanisms:");
    expect_count("frames on the raw stream", n_raw_frames);
    expect_count("row switches (L1 buffer swaps)", n_switch);
    expect_count("scheduler stalls on the context exchange", n_stalls);
    expect_count("batches ended by an empty FIFO", n_batch_empty);
    expect_count("batches ended by the batch limit", n_batch_full);
    expect_count("result words streamed", n_res_words);
    expect_count("intermediate result updates", n_updates);
    for (int s = 0; s < int'(S); s++)
      expect_count($sformatf("executions of block %0d with data", s), int'(real_execs[s]));
    $display("  rows dropped by full FIFOs               %0d", n_drop);
    

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

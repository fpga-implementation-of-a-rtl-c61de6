// tb_pixel_scheduler: the scheduler between models of the row FIFOs
// (queues, one-cycle read), of the CorrPEs (busy for VISIT cycles, may be
// restarted in their last cycle) and of the context exchange (busy for a
// random 20..200 cycles). Checks: the start-up sequence (load row 0, swap,
// load row 1); every sample handed to the CorrPEs is the next entry of the
// current row's FIFO; no more than BATCH samples per batch; a switch only
// when the CorrPEs and the exchange are idle, with write-back of the row
// left and preload of the row after the next; rows visited round robin;
// `stall` exactly when a switch waits for the exchange; all samples are
// eventually consumed.
module tb_pixel_scheduler;
  localparam int unsigned NX = 4, NY = 4, BATCH = 3, YW = 2, VISIT = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NY-1:0] fifo_empty;
  logic fifo_rd, pe_start, pe_busy, pe_done, swap, ex_start, ex_wb_en, ex_busy, stall, switched;
  logic [YW-1:0] fifo_row, cur_row, ex_wb_row, ex_ld_row;
  logic [NX-1:0] fifo_data, pe_sample;

  pixel_scheduler #(.NX(NX), .NY(NY), .BATCH(BATCH)) dut (.*);

  logic [NX-1:0] q [NY][$];
  int checks = 0, failures = 0, consumed = 0, produced = 0, n_switch = 0, n_stall = 0;
  int pe_t = 0, ex_t = 0, batch = 0;
  logic [NX-1:0] exp_sample [$];
  int exp_row = 0, swaps = 0, ex_starts = 0;

  always_comb for (int y = 0; y < NY; y++) fifo_empty[y] = (q[y].size() == 0);
  assign pe_busy = (pe_t > 0);
  assign pe_done = (pe_t == 1);
  assign ex_busy = (ex_t > 0);

  task automatic fail(string m);
    failures++;
    if (failures < 15) $display("%0t: %s", $time, m);
  endtask

  always @(posedge clk) if (rst_n) begin
    // FIFO model
    if (fifo_rd) begin
      checks++;
      if (fifo_row != cur_row || q[fifo_row].size() == 0) fail("bad FIFO read");
      else begin
        fifo_data <= q[fifo_row][0];
        exp_sample.push_back(q[fifo_row].pop_front());
      end
      batch++;
      checks++;
      if (batch > BATCH) fail("batch too long");
    end
    // CorrPE model
    if (pe_start) begin
      checks++;
      if (pe_busy && !pe_done) fail("start while busy");
      if (exp_sample.size() == 0 || pe_sample != exp_sample[0]) fail("wrong sample");
      else void'(exp_sample.pop_front());
      consumed++;
      pe_t <= VISIT;
    end else if (pe_t > 0) pe_t <= pe_t - 1;
    // exchange model and start-up sequence
    if (swap) swaps++;
    if (ex_start) begin
      checks++;
      if (ex_busy) fail("exchange started while busy");
      ex_starts++;
      if (ex_starts == 1 && (ex_wb_en || ex_ld_row != 0)) fail("first command not 'load row 0'");
      if (ex_starts == 2 && (ex_wb_en || ex_ld_row != 1 || swaps != 1)) fail("second command not 'swap, load row 1'");
      if (ex_starts > 2) begin
        if (!ex_wb_en || int'(ex_wb_row) != exp_row || int'(ex_ld_row) != (exp_row + 2) % NY || !swap)
          fail("switch command wrong");
      end
      ex_t <= 20 + $urandom % 180;
    end else if (ex_t > 0) ex_t <= ex_t - 1;
    if (switched) begin
      checks++;
      if (pe_busy || ex_busy) fail("switch while busy");
      n_switch++;
      batch = 0;
      exp_row = (exp_row + 1) % NY;
    end
    // stall: a switch is due but the exchange is busy
    if (stall) begin
      n_stall++;
      checks++;
      if (!ex_busy) fail("stall without busy exchange");
    end
    checks++;
    if (int'(cur_row) != exp_row && !switched) fail("current row wrong");
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fifo_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (($urandom % 100) < 8) begin
        int y;
        y = $urandom % NY;
        q[y].push_back(NX'($urandom));
        produced++;
      end
    end
    // drain
    for (int i = 0; i < 20000 && consumed < produced; i++) @(negedge clk);
    checks += 3;
    if (consumed != produced) fail($sformatf("%0d of %0d samples consumed", consumed, produced));
    if (n_switch < 10) fail("too few switches");
    if (n_stall == 0) fail("never stalled");
    $display("samples %0d switches %0d stall cycles %0d", consumed, n_switch, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

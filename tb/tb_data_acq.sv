// tb_data_acq: a random sensor model answers row reads one cycle later; the
// test checks that every frame is read row by row in order, that frames
// start exactly FRAME_CYCLES apart, that the row stream carries the
// sensor's bits with the right row index and start-of-frame flag, and that
// acquisition stops when disabled.
module tb_data_acq;
  localparam int unsigned NX = 8, NY = 4, FRAME_CYCLES = 20, YW = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable, spad_rd, row_valid, row_sof;
  logic [YW-1:0] spad_row, row_idx;
  logic [NX-1:0] spad_data, row_data;
  logic [31:0] frame_cnt;
  logic [NX-1:0] sent [$];
  logic [YW-1:0] sent_row [$];
  int checks = 0, failures = 0, cyc = 0, last_sof = -1, frames = 0;
  int unsigned exp_row = 0;

  data_acq #(.NX(NX), .NY(NY), .FRAME_CYCLES(FRAME_CYCLES)) dut (.*);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (spad_rd) begin
      logic [YW-1:0] r;
      r = spad_row;
      spad_data <= NX'($urandom);
      #1 sent.push_back(spad_data); sent_row.push_back(r);
    end
  end

  always @(negedge clk) begin
    if (row_valid) begin
      logic [NX-1:0] d; logic [YW-1:0] r;
      d = sent.pop_front(); r = sent_row.pop_front();
      checks++;
      if (row_data !== d || row_idx !== r || int'(row_idx) != exp_row || row_sof != (row_idx == 0)) begin
        failures++;
        $display("row %0d data %h sof %0d: expected row %0d data %h (row %0d)", row_idx, row_data, row_sof, exp_row, d, r);
      end
      exp_row = (exp_row + 1) % NY;
      if (row_sof) begin
        frames++;
        if (last_sof >= 0) begin
          checks++;
          if (cyc - last_sof != FRAME_CYCLES) begin
            failures++; $display("frame period %0d", cyc - last_sof);
          end
        end
        last_sof = cyc;
      end
    end
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enable = 0; spad_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    enable = 1;
    wait (frame_cnt == 10);
    @(negedge clk) enable = 0;
    repeat (3 * FRAME_CYCLES) @(negedge clk);
    checks += 2;
    if (frames != 10) begin failures++; $display("%0d frames seen", frames); end
    if (frame_cnt != 10 || sent.size() != 0) begin failures++; $display("did not stop"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

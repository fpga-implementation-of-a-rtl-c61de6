// tb_row_reorder: random writes of rows into random row FIFOs and random
// reads from non-empty FIFOs, compared with one reference queue per row.
// Checks the data order, the empty and full flags, and that a write into a
// full FIFO is dropped and flagged as overflow.
module tb_row_reorder;
  localparam int unsigned NX = 8, NY = 4, DEPTH = 8, YW = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, overflow, rd_en;
  logic [YW-1:0] in_row, rd_row;
  logic [NX-1:0] in_data, rd_data;
  logic [NY-1:0] empty, full;
  logic [NX-1:0] q [NY][$];
  int checks = 0, failures = 0, n_ovf = 0;

  row_reorder #(.NX(NX), .NY(NY), .DEPTH(DEPTH)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NX-1:0] exp_d;
    bit pend;
    pend = 0;
    in_valid = 0; rd_en = 0; in_row = '0; rd_row = '0; in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      // result of last cycle's read
      if (pend) begin
        checks++;
        if (rd_data !== exp_d) begin failures++; $display("read %h expected %h", rd_data, exp_d); end
        pend = 0;
      end
      // flags
      for (int y = 0; y < NY; y++) begin
        checks++;
        if (empty[y] != (q[y].size() == 0) || full[y] != (q[y].size() == DEPTH)) begin
          failures++;
          $display("flags of row %0d wrong: size %0d", y, q[y].size());
        end
      end
      // new operations (writes more likely in the first half)
      in_valid = ($urandom % 100) < ((i < 2000) ? 60 : 30);
      in_row   = YW'($urandom % NY);
      in_data  = NX'($urandom);
      rd_row   = YW'($urandom % NY);
      rd_en    = (($urandom % 100) < 45) && q[rd_row].size() > 0;
      #1;
      checks++;
      if (overflow != (in_valid && q[in_row].size() == DEPTH)) begin
        failures++; $display("overflow flag wrong");
      end
      // the DUT sees the FIFO state before this cycle's read
      if (in_valid) begin
        if (q[in_row].size() < DEPTH) q[in_row].push_back(in_data);
        else n_ovf++;
      end
      if (rd_en) begin exp_d = q[rd_row].pop_front(); pend = 1; end
    end
    checks++;
    if (n_ovf == 0) begin failures++; $display("overflow never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

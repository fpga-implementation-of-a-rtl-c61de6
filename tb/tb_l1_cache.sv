// tb_l1_cache: checks the double-buffered context RAM. Port A writes the
// active buffer while port B writes the idle one; both read back their own
// data with a two-cycle latency; after a swap each port sees the other
// buffer, i.e. port B reads what port A wrote and vice versa.
module tb_l1_cache;
  localparam int unsigned WORDS = 128, WIDTH = 64, AW = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic swap, active;
  logic [AW-1:0] a_addr, b_addr;
  logic a_we, b_we;
  logic [WIDTH-1:0] a_wdata, a_rdata, b_wdata, b_rdata;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] pa [WORDS], pb [WORDS];

  l1_cache #(.WORDS(WORDS), .WIDTH(WIDTH)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd_both(int wa, int wb, logic [WIDTH-1:0] ea, logic [WIDTH-1:0] eb);
    @(negedge clk); a_addr = AW'(wa); b_addr = AW'(wb); a_we = 0; b_we = 0;
    @(negedge clk); a_addr = '0; b_addr = '0;
    @(negedge clk);   // two edges after the address
    checks += 2;
    if (a_rdata !== ea) begin failures++; $display("A word %0d: %h vs %h", wa, a_rdata, ea); end
    if (b_rdata !== eb) begin failures++; $display("B word %0d: %h vs %h", wb, b_rdata, eb); end
  endtask

  initial begin
    swap = 0; a_we = 0; b_we = 0; a_addr = '0; b_addr = '0; a_wdata = '0; b_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < WORDS; w++) begin
      pa[w] = {$urandom, $urandom};
      pb[w] = {$urandom, $urandom};
      @(negedge clk);
      a_addr = AW'(w); a_we = 1; a_wdata = pa[w];
      b_addr = AW'(w); b_we = 1; b_wdata = pb[w];
    end
    @(negedge clk); a_we = 0; b_we = 0;
    for (int i = 0; i < 40; i++) begin
      int w1, w2;
      w1 = $urandom % WORDS; w2 = $urandom % WORDS;
      rd_both(w1, w2, pa[w1], pb[w2]);
    end
    checks++;
    if (active !== 1'b0) begin failures++; $display("active after reset"); end
    @(negedge clk); swap = 1;
    @(negedge clk); swap = 0;
    checks++;
    if (active !== 1'b1) begin failures++; $display("swap did not toggle"); end
    for (int i = 0; i < 40; i++) begin
      int w1, w2;
      w1 = $urandom % WORDS; w2 = $urandom % WORDS;
      rd_both(w1, w2, pb[w1], pa[w2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

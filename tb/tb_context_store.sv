// tb_context_store: writes random words to random contexts of the full-size
// store and reads them back one cycle later, checking against a reference
// associative array; untouched words are not read.
module tb_context_store;
  localparam int unsigned NCTX = 1024, WORDS = 128, CW = 10, AW = 7;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [CW-1:0] ctx; logic [AW-1:0] word; logic we;
  logic [63:0] wdata, rdata;
  logic [63:0] ref_m [int];
  int checks = 0, failures = 0;

  context_store #(.NCTX(NCTX), .WORDS(WORDS), .WIDTH(64)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int keys [$];
    we = 0; ctx = '0; word = '0; wdata = '0;
    for (int i = 0; i < 2000; i++) begin
      int a;
      a = $urandom % (NCTX * WORDS);
      @(negedge clk);
      ctx = CW'(a / WORDS); word = AW'(a % WORDS); we = 1; wdata = {$urandom, $urandom};
      if (!ref_m.exists(a)) keys.push_back(a);
      ref_m[a] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (keys[i]) begin
      @(negedge clk); ctx = CW'(keys[i] / WORDS); word = AW'(keys[i] % WORDS);
      @(negedge clk);
      checks++;
      if (rdata !== ref_m[keys[i]]) begin
        failures++;
        if (failures < 10) $display("addr %0d: %h vs %h", keys[i], rdata, ref_m[keys[i]]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

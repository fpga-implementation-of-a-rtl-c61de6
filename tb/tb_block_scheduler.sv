// tb_block_scheduler: checks the block schedule against the modular
// relations c mod 2 = 0 (s = 0), c mod 4 = 3 (s = 1) and
// c mod 2^(s+1) = 2^s - 3 (s >= 2), for every c below 2^17 and for random
// 32-bit values. `pair_done` is checked against its definition: the next
// execution of block s+1 comes before the next execution of block s. It
// also checks that no two blocks are ever selected for the same c.
module tb_block_scheduler;
  localparam int unsigned S = 14;
  localparam int unsigned SW = $clog2(S + 1);

  logic [31:0]   c;
  logic          valid, pair_done;
  logic [SW-1:0] s;
  int checks = 0, failures = 0;

  block_scheduler #(.S(S), .CW(32)) dut (.c, .valid, .s, .pair_done);

  function automatic int sched_of(longint unsigned cc);
    if (cc % 2 == 0) return 0;
    if (cc % 4 == 3) return 1;
    for (int k = 2; k < 40; k++)
      if (cc % (64'd1 << (k + 1)) == (64'd1 << k) - 3) return k;
    return -1;
  endfunction

  function automatic bit closes_pair(longint unsigned cc, int k);
    for (longint unsigned n = cc + 1; n < cc + (64'd1 << 20); n++) begin
      int t;
      t = sched_of(n);
      if (t == k) return 0;
      if (t == k + 1) return 1;
    end
    return 0;
  endfunction

  task automatic check(longint unsigned cc);
    int e;
    c = cc[31:0];
    #1;
    e = sched_of(cc[31:0]);
    checks++;
    if (valid != (e >= 0 && e < int'(S)) || (valid && int'(s) != e)) begin
      failures++;
      if (failures < 10) $display("c=%0d: got valid=%0d s=%0d, expected s=%0d", cc, valid, s, e);
    end
    if (valid && e < int'(S) - 1) begin
      checks++;
      if (pair_done != closes_pair(cc[31:0], e)) begin
        failures++;
        if (failures < 10) $display("c=%0d s=%0d: pair_done=%0d wrong", cc, e, pair_done);
      end
    end
  endtask

  initial begin
    #1000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (longint unsigned cc = 0; cc < (64'd1 << 17); cc++) check(cc);
    for (int i = 0; i < 2000; i++) check({$urandom} & 32'hFFFF_FFF0 | 32'($urandom % 16));
    // the worked examples of the schedule figure (c = 0..31)
    begin
      int fig [32] = '{0, 2, 0, 1, 0, 3, 0, 1, 0, 2, 0, 1, 0, 4, 0, 1,
                       0, 2, 0, 1, 0, 3, 0, 1, 0, 2, 0, 1, 0, 5, 0, 1};
      for (int cc = 0; cc < 32; cc++) begin
        c = 32'(cc); #1;
        checks++;
        if (!valid || int'(s) != fig[cc]) begin
          failures++;
          $display("c=%0d: s=%0d, figure has %0d", cc, s, fig[cc]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// block_scheduler: which linear correlator block runs at counter value c.
//
// A pixel's multi-tau correlator executes one linear correlator block per
// value of its counter c. Block 0 runs at every even c, block 1 when
// c mod 4 = 3 and block s >= 2 when c mod 2^(s+1) = 2^s - 3. As in the
// published bit table, each test is a plain comparison of the low s+1 bits
// of c with a constant (x...x0, x..x011, x..x001, x..x0101, x..x01101, ...).
// Values of c that select a block s >= S run nothing (valid = 0).
//
// `pair_done` says that this execution of block s closes a pair: its output
// is added to the stored first half and the sum becomes the input of the
// next execution of block s+1. The pairing is the one drawn in the schedule
// figure: the execution of block s just before an execution of block s+1
// closes the pair (s = 0: c mod 4 = 2; s = 1: c mod 8 = 7; s >= 2: bit s+1
// of c is 0).
//
// Purely combinational; S is the number of blocks (14 in the published
// configuration). CW is the counter width.
module block_scheduler #(
  parameter int unsigned S  = 14,
  parameter int unsigned CW = 32
) (
  input  logic [CW-1:0]          c,
  output logic                   valid,
  output logic [$clog2(S+1)-1:0] s,
  output logic                   pair_done
);

  initial begin
    assert (CW >= S + 2) else $error("counter too narrow for S blocks");
  end

  always_comb begin
    valid     = 1'b0;
    s         = '0;
    pair_done = 1'b0;
    if (c[0] == 1'b0) begin
      valid     = 1'b1;
      s         = '0;
      pair_done = c[1];
    end else if (c[1:0] == 2'b11) begin
      valid     = (S > 1);
      s         = (S > 1) ? 1 : 0;
      pair_done = c[2];
    end else begin
      for (int unsigned k = 2; k < S; k++) begin
        // low k+1 bits of c equal to 2^k - 3
        if ((c & ((CW'(1) << (k + 1)) - CW'(1))) == ((CW'(1) << k) - CW'(3))) begin
          valid     = 1'b1;
          s         = ($clog2(S+1))'(k);
          pair_done = ~c[k+1];
        end
      end
    end
  end

endmodule

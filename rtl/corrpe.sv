// corrpe: correlation processing element (one multi-tau correlator, serial).
//
// A multi-tau correlator consists of S linear correlator blocks of P lag
// channels each; every channel multiplies the undelayed ("global") input
// with a delayed copy of the "local" input and accumulates the product.
// Block s+1 is fed with sums of two consecutive inputs of block s (global)
// and of two consecutive values leaving the delay line of block s (local),
// so its lags are spaced twice as far apart. This module computes all of
// those channels with a single multiply-accumulate datapath: the state of
// every channel (delay register and accumulator), the hand-over sums between
// the blocks, the counter c and the two monitors live in a 128-word pixel
// context in the L1 RAM (port A of l1_cache), and the CorrPE streams through
// them.
//
// One "visit" processes one new sample (g, l) of the pixel whose context is
// in the active L1 buffer:
//   t = 0..2          load counter c and the two monitors
//   block phase 0     execute block 0 with the new sample       (2P+3 cycles)
//   block phase 1     execute the block the scheduler assigns to
//                     counter value c+1, if any                  (2P+3 cycles)
//   last 3 cycles     store c+2 and the monitors plus the sample
// so a visit takes 2(2P+3)+6 cycles (44 for P = 8). Each block execution is
//   tau = 0           load the hand-over word into this block (s >= 1)
//   tau = 1           load the hand-over word out of this block (s < S-1)
//   tau = 2..2P+1     the P channels, four at a time, each going through
//                     Load, Wait, Multiply, Add, Store; the loads of four
//                     channels occupy four cycles, their stores the next four
//   tau = 2P+2        store the hand-over word out of this block
// so the single RAM port is never asked for two accesses in one cycle.
// Channel j of block s multiplies the block's global input with x_j, where
// x_0 is the block's local input and x_j (j > 0) is the old delay register
// of channel j-1; x_j becomes the new delay register of channel j. The old
// delay register of channel P-1 leaves the block and is summed in pairs
// for block s+1.
//
// Follows the paper: one MAC channel reused for all channels, the five
// pipeline steps interleaved four channels deep, 2P+3 cycles per block
// execution, the block schedule on counter c, pair summation between the
// blocks, one global and one local monitor, the 128-word context layout and
// the 16/32-bit word sizes. This design's own choices: the order of the
// three extra cycles of a block, the packing of the hand-over word, keeping
// c and the monitors in the context (six extra cycles per visit), and the
// start/done handshake. Sums wrap silently when they outgrow their words,
// as in the paper's word sizes.
//
// Interface: `start` begins a visit with `samp_g`/`samp_l` when the CorrPE
// is idle or in the last cycle of a visit, where `done` is high; visits can
// thus follow each other without a gap. The m_* port connects to
// port A of l1_cache (read data two cycles after the address).
//
// Lint notes: bits 63:48 of a channel word are unused by the context
// layout and are never read; the RAM-port assertion is switched off during
// reset with `disable iff (!rst_n)`, so lint sees rst_n used both as an
// asynchronous reset and in clocked (assertion-only) logic.
module corrpe
  import corr_pkg::*;
#(
  parameter int unsigned S     = 14,
  parameter int unsigned P     = 8,
  parameter int unsigned PIX_W = 1,
  localparam int unsigned WORDS = S * P + S + 2,
  localparam int unsigned AW    = $clog2(WORDS),
  localparam int unsigned BLK   = 2 * P + 3,
  localparam int unsigned VISIT = 2 * BLK + 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [PIX_W-1:0]  samp_g,
  input  logic [PIX_W-1:0]  samp_l,
  output logic              busy,
  output logic              done,
  // context RAM (L1 port A)
  output logic [AW-1:0]     m_addr,
  output logic              m_we,
  output logic [WORD_W-1:0] m_wdata,
  input  logic [WORD_W-1:0] m_rdata
);

  localparam int unsigned SW = $clog2(S + 1);

  initial begin
    assert (P % 4 == 0) else $error("P must be a multiple of 4");
    assert (S >= 2 && S <= 16) else $error("S must be 2..16 (16-bit pair sums)");
    assert (PIX_W <= DATA_W) else $error("pixel too wide");
  end

  // ---------------------------------------------------------------- control
  logic [$clog2(VISIT)-1:0] t;
  logic [PIX_W-1:0]         sg_q, sl_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      t    <= '0;
      sg_q <= '0;
      sl_q <= '0;
    end else if (start && (!busy || done)) begin
      // a new visit may start in the last cycle of the previous one
      busy <= 1'b1;
      t    <= '0;
      sg_q <= samp_g;
      sl_q <= samp_l;
    end else if (done) begin
      busy <= 1'b0;
    end else if (busy) begin
      t <= t + 1'b1;
    end
  end

  assign done = busy && (t == ($clog2(VISIT))'(VISIT - 1));

  // Position inside the visit.
  typedef enum logic [1:0] {PH_PRO, PH_BLK0, PH_BLK1, PH_EPI} phase_e;
  phase_e phase;
  int unsigned tau;   // cycle inside the current phase

  always_comb begin
    if (int'(t) < 3) begin
      phase = PH_PRO;  tau = int'(t);
    end else if (int'(t) < 3 + BLK) begin
      phase = PH_BLK0; tau = int'(t) - 3;
    end else if (int'(t) < 3 + 2 * BLK) begin
      phase = PH_BLK1; tau = int'(t) - 3 - BLK;
    end else begin
      phase = PH_EPI;  tau = int'(t) - 3 - 2 * BLK;
    end
  end

  // Counter, monitors and the block scheduler.
  logic [CNT_W-1:0] c_q;
  logic [ACC_W-1:0] mg_q, ml_q;
  logic [CNT_W-1:0] sched_c;
  logic             blk_valid, pair_done;
  logic [SW-1:0]    blk_s;

  assign sched_c = (phase == PH_BLK1) ? c_q + 1'b1 : c_q;

  block_scheduler #(.S(S), .CW(CNT_W)) u_sched (
    .c(sched_c), .valid(blk_valid), .s(blk_s), .pair_done(pair_done)
  );

  logic in_blk;
  assign in_blk = busy && (phase == PH_BLK0 || phase == PH_BLK1) && blk_valid;

  // Channel in a pipeline stage `d` cycles after its Load.
  function automatic logic chan_at(int unsigned tu, int unsigned d, output int unsigned j);
    int r;
    r = int'(tu) - int'(d) - 2;
    j = 0;
    if (r < 0) return 1'b0;
    j = (r / 8) * 4 + (r % 8);
    return (r % 8 < 4) && (r / 8 < int'(P / 4));
  endfunction

  logic        ld_v, mul_v, add_v, st_v;
  int unsigned ld_j, mul_j, add_j_unused, st_j;
  always_comb begin
    ld_v  = in_blk && chan_at(tau, 0, ld_j);
    mul_v = in_blk && chan_at(tau, 2, mul_j);
    add_v = in_blk && chan_at(tau, 3, add_j_unused);
    st_v  = in_blk && chan_at(tau, 4, st_j);
  end

  logic has_in, has_out;
  assign has_in  = (blk_s != '0);
  assign has_out = (int'(blk_s) < int'(S) - 1);

  // --------------------------------------------------------------- datapath
  logic [DATA_W-1:0] g_in, l_in;      // inputs of the running block
  logic [DATA_W-1:0] carry;           // old delay register of previous channel
  logic [DATA_W-1:0] x_m, x_a;        // local value of the channel in M / A
  logic [ACC_W-1:0]  prod_q, acc_m, sum_q;
  ho_word_t          ho_q;            // hand-over word out of this block
  chan_word_t        rd_chan;
  ho_word_t          rd_ho;
  logic [DATA_W-1:0] x_cur;

  assign rd_chan = chan_word_t'(m_rdata);
  assign rd_ho   = ho_word_t'(m_rdata);
  assign x_cur   = (mul_j == 0) ? l_in : carry;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_q <= '0; mg_q <= '0; ml_q <= '0;
      g_in <= '0; l_in <= '0; carry <= '0; x_m <= '0; x_a <= '0;
      prod_q <= '0; acc_m <= '0; sum_q <= '0; ho_q <= '0;
    end else if (busy) begin
      // prologue data (loads at t = 0, 1, 2)
      if (t == 2) c_q  <= m_rdata[CNT_W-1:0];
      if (t == 3) mg_q <= m_rdata[ACC_W-1:0];
      if (t == 4) ml_q <= m_rdata[ACC_W-1:0];
      if (in_blk) begin
        // block inputs (hand-over word loaded at tau = 0)
        if (tau == 2) begin
          if (has_in) begin
            g_in <= rd_ho.ready_g;
            l_in <= rd_ho.ready_l;
          end else begin
            g_in <= DATA_W'(sg_q);
            l_in <= DATA_W'(sl_q);
          end
        end
        if (tau == 3) ho_q <= rd_ho;   // loaded at tau = 1
        // Multiply
        if (mul_v) begin
          prod_q <= ACC_W'(g_in) * ACC_W'(x_cur);
          acc_m  <= rd_chan.acc;
          x_m    <= x_cur;
          carry  <= rd_chan.delay;
        end
        // Add
        if (add_v) begin
          sum_q <= acc_m + prod_q;
          x_a   <= x_m;
        end
      end
    end
  end

  // ------------------------------------------------------------ RAM port
  // Words written back: a channel leaving the Store step, and the
  // hand-over word out of the running block.
  chan_word_t st_word;
  ho_word_t   ho_new;
  always_comb begin
    st_word.unused = '0;
    st_word.delay  = x_a;
    st_word.acc    = sum_q;
    if (pair_done) begin
      ho_new.ready_g = ho_q.part_g + g_in;
      ho_new.ready_l = ho_q.part_l + carry;
      ho_new.part_g  = '0;
      ho_new.part_l  = '0;
    end else begin
      ho_new.ready_g = ho_q.ready_g;
      ho_new.ready_l = ho_q.ready_l;
      ho_new.part_g  = g_in;
      ho_new.part_l  = carry;
    end
  end

  always_comb begin
    m_addr  = '0;
    m_we    = 1'b0;
    m_wdata = '0;
    if (busy) begin
      unique case (phase)
        PH_PRO: begin
          unique case (tau)
            0:       m_addr = AW'(cnt_addr(S, P));
            1:       m_addr = AW'(mong_addr(S, P));
            default: m_addr = AW'(monl_addr(S, P));
          endcase
        end
        PH_EPI: begin
          m_we = 1'b1;
          unique case (tau)
            0: begin
              m_addr  = AW'(cnt_addr(S, P));
              m_wdata = WORD_W'(c_q + CNT_W'(2));
            end
            1: begin
              m_addr  = AW'(mong_addr(S, P));
              m_wdata = WORD_W'(mg_q + ACC_W'(sg_q));
            end
            default: begin
              m_addr  = AW'(monl_addr(S, P));
              m_wdata = WORD_W'(ml_q + ACC_W'(sl_q));
            end
          endcase
        end
        default: begin
          if (in_blk) begin
            if (tau == 0 && has_in) begin
              m_addr = AW'(ho_addr(int'(blk_s) - 1, S, P));
            end else if (tau == 1 && has_out) begin
              m_addr = AW'(ho_addr(int'(blk_s), S, P));
            end else if (ld_v) begin
              m_addr = AW'(chan_addr(int'(blk_s), ld_j, P));
            end else if (st_v) begin
              m_addr  = AW'(chan_addr(int'(blk_s), st_j, P));
              m_we    = 1'b1;
              m_wdata = st_word;
            end else if (tau == 2 * P + 2 && has_out) begin
              m_addr  = AW'(ho_addr(int'(blk_s), S, P));
              m_we    = 1'b1;
              m_wdata = ho_new;
            end
          end
        end
      endcase
    end
  end

  // A load and a store of the channel pipeline never share a cycle.
  assert property (@(posedge clk) disable iff (!rst_n) (busy) |-> (!(ld_v && st_v)))
    else $error("RAM port conflict");

endmodule

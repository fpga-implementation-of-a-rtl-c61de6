// imfcs_top: real-time multi-tau autocorrelator array for a 32x32 SPAD camera.
//
// The sensor delivers a 32x32 frame of 1-bit pixels every 10 us; the design
// computes the multi-tau autocorrelation function (S = 14 blocks of P = 8
// lag channels, lags from one frame time up to about 2^14 * 8 frames) of
// every one of the 1024 pixels in real time.
//
// Data path:
//   data_acq        reads a frame from the sensor every FRAME_CYCLES and
//                   streams its rows, also out to the raw-data port (host)
//   row_reorder     one FIFO per row index
//   pixel_scheduler selects the row the CorrPEs work on, feeds them one
//                   FIFO entry per visit (bit x to CorrPE x) and switches
//                   rows in batches
//   corrpe[x]       one serial multi-tau correlator per column, NX of them
//   l1_cache[x]     double-buffered context RAM of CorrPE x
//   context_exchange writes finished contexts back to the context store,
//                   preloads the next ones and emits every written-back
//                   word on the result port (host)
//   context_store   the contexts of all NX*NY pixels
// The autocorrelation mode is wired here: each CorrPE's global and local
// inputs both receive its pixel.
//
// Ports: sensor row port (see data_acq), raw row stream, result word stream
// (context number y*NX+x, word number, 64-bit word, laid out as in corr_pkg),
// and status: `fifo_overflow` (a row was dropped), `sched_stall` (the
// scheduler waits for the context exchange), `row_switch` (a row switch),
// `cur_row`. The structure follows the paper's system diagram; the port
// formats are this design's own.
//
// Lint notes: the per-FIFO full flags are not needed here (a full FIFO
// reports through `fifo_overflow`), and only CorrPE 0's `done` is used
// because all CorrPEs run in lock step, which the assertion below checks.
// That assertion is off during reset (`disable iff (!rst_n)`), so lint sees
// rst_n in asynchronous and in clocked (assertion-only) use.
module imfcs_top
  import corr_pkg::*;
#(
  parameter int unsigned NX           = 32,
  parameter int unsigned NY           = 32,
  parameter int unsigned S            = 14,
  parameter int unsigned P            = 8,
  parameter int unsigned FIFO_DEPTH   = 2048,
  parameter int unsigned BATCH        = 2048,
  parameter int unsigned FRAME_CYCLES = 1440,
  localparam int unsigned WORDS = S * P + S + 2,
  localparam int unsigned AW    = $clog2(WORDS),
  localparam int unsigned YW    = $clog2(NY),
  localparam int unsigned CW    = $clog2(NX * NY)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              acq_enable,
  input  logic              res_enable,
  // SPAD array
  output logic              spad_rd,
  output logic [YW-1:0]     spad_row,
  input  logic [NX-1:0]     spad_data,
  // raw image stream (to the first USB interface)
  output logic              raw_valid,
  output logic [YW-1:0]     raw_row,
  output logic [NX-1:0]     raw_data,
  output logic              raw_sof,
  // result stream (to the second USB interface)
  output logic              res_valid,
  output logic [CW-1:0]     res_ctx,
  output logic [AW-1:0]     res_word,
  output logic [WORD_W-1:0] res_data,
  // status
  output logic [31:0]       frame_cnt,
  output logic              fifo_overflow,
  output logic              sched_stall,
  output logic              row_switch,
  output logic [YW-1:0]     cur_row
);

  // ------------------------------------------------------- acquisition
  logic          row_valid, row_sof;
  logic [YW-1:0] row_idx;
  logic [NX-1:0] row_data;

  data_acq #(.NX(NX), .NY(NY), .FRAME_CYCLES(FRAME_CYCLES)) u_acq (
    .clk, .rst_n, .enable(acq_enable),
    .spad_rd, .spad_row, .spad_data,
    .row_valid, .row_idx, .row_data, .row_sof, .frame_cnt
  );

  assign raw_valid = row_valid;
  assign raw_row   = row_idx;
  assign raw_data  = row_data;
  assign raw_sof   = row_sof;

  // ------------------------------------------------------- row FIFOs
  logic          fifo_rd;
  logic [YW-1:0] fifo_row;
  logic [NX-1:0] fifo_data;
  logic [NY-1:0] fifo_empty, fifo_full;

  row_reorder #(.NX(NX), .NY(NY), .DEPTH(FIFO_DEPTH)) u_reorder (
    .clk, .rst_n,
    .in_valid(row_valid), .in_row(row_idx), .in_data(row_data),
    .overflow(fifo_overflow),
    .rd_en(fifo_rd), .rd_row(fifo_row), .rd_data(fifo_data),
    .empty(fifo_empty), .full(fifo_full)
  );

  // ------------------------------------------------------- scheduler
  logic          pe_start, pe_busy, pe_done, swap;
  logic [NX-1:0] pe_sample;
  logic          ex_start, ex_wb_en, ex_busy;
  logic [YW-1:0] ex_wb_row, ex_ld_row;

  pixel_scheduler #(.NX(NX), .NY(NY), .BATCH(BATCH)) u_sched (
    .clk, .rst_n,
    .fifo_empty, .fifo_rd, .fifo_row, .fifo_data,
    .pe_start, .pe_sample, .pe_busy, .pe_done, .swap, .cur_row,
    .ex_start, .ex_wb_en, .ex_wb_row, .ex_ld_row, .ex_busy,
    .stall(sched_stall), .switched(row_switch)
  );

  // ------------------------------------------------------- CorrPE array
  logic [AW-1:0]     l1b_addr;
  logic [NX-1:0]     l1b_we;
  logic [WORD_W-1:0] l1b_wdata;
  logic [WORD_W-1:0] l1b_rdata [NX];
  logic [NX-1:0]     busy_v, done_v;

  for (genvar x = 0; x < NX; x++) begin : g_pe
    logic [AW-1:0]     a_addr;
    logic              a_we;
    logic [WORD_W-1:0] a_wdata, a_rdata;
    logic              active_unused;

    corrpe #(.S(S), .P(P), .PIX_W(1)) u_pe (
      .clk, .rst_n,
      .start(pe_start), .samp_g(pe_sample[x]), .samp_l(pe_sample[x]),
      .busy(busy_v[x]), .done(done_v[x]),
      .m_addr(a_addr), .m_we(a_we), .m_wdata(a_wdata), .m_rdata(a_rdata)
    );

    l1_cache #(.WORDS(WORDS), .WIDTH(WORD_W)) u_l1 (
      .clk, .rst_n, .swap, .active(active_unused),
      .a_addr, .a_we, .a_wdata, .a_rdata,
      .b_addr(l1b_addr), .b_we(l1b_we[x]), .b_wdata(l1b_wdata), .b_rdata(l1b_rdata[x])
    );
  end

  // All CorrPEs run in lock step; CorrPE 0 stands for all of them.
  assign pe_busy = busy_v[0];
  assign pe_done = done_v[0];

  assert property (@(posedge clk) disable iff (!rst_n) busy_v == {NX{busy_v[0]}})
    else $error("CorrPEs out of step");

  // ------------------------------------------------------- contexts
  logic [CW-1:0]     cs_ctx;
  logic [AW-1:0]     cs_word;
  logic              cs_we;
  logic [WORD_W-1:0] cs_wdata, cs_rdata;

  context_exchange #(.NX(NX), .NY(NY), .WORDS(WORDS), .WIDTH(WORD_W)) u_exch (
    .clk, .rst_n,
    .start(ex_start), .wb_en(ex_wb_en), .wb_row(ex_wb_row), .ld_row(ex_ld_row),
    .busy(ex_busy),
    .l1_addr(l1b_addr), .l1_we(l1b_we), .l1_wdata(l1b_wdata), .l1_rdata(l1b_rdata),
    .cs_ctx, .cs_word, .cs_we, .cs_wdata, .cs_rdata,
    .res_en(res_enable), .res_valid, .res_ctx, .res_word, .res_data
  );

  context_store #(.NCTX(NX * NY), .WORDS(WORDS), .WIDTH(WORD_W)) u_store (
    .clk, .ctx(cs_ctx), .word(cs_word), .we(cs_we), .wdata(cs_wdata), .rdata(cs_rdata)
  );

endmodule

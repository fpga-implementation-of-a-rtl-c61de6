// pixel_scheduler: decides which pixel contexts the CorrPEs work on.
//
// One CorrPE serves one column of the sensor; all NX CorrPEs run in lock
// step on the contexts of the same row `cur_row`, each taking its own bit
// of that row's FIFO entries, one sample per visit. The scheduler keeps a
// batch of up to BATCH samples on one row, then switches to the next row
// (round robin): it pulses `swap` to exchange the L1 buffers of all
// CorrPEs, so the context of the next row, loaded in the background,
// becomes active, and starts the context exchange, which writes back the
// row just left and preloads the row after the next one. A switch happens
// when the batch is full or the row's FIFO is empty, the CorrPEs are idle,
// and the previous exchange has finished; while the last condition is not
// met the scheduler waits and `stall` is high.
//
// After reset it first loads row 0, swaps it in, and starts loading row 1.
// One sample is prefetched from the FIFO while the CorrPEs are busy, so
// visits follow each other without gaps. The multiplexing of one CorrPE
// over the pixels of a column with double-buffered contexts follows the
// paper; the batch rule, round robin order and prefetch are this design's.
//
// Lint note: the assertion at the end is off during reset
// (`disable iff (!rst_n)`), so lint sees rst_n in asynchronous and in
// clocked (assertion-only) use.
module pixel_scheduler #(
  parameter int unsigned NX    = 32,
  parameter int unsigned NY    = 32,
  parameter int unsigned BATCH = 2048,
  localparam int unsigned YW = $clog2(NY),
  localparam int unsigned BW = $clog2(BATCH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // row FIFOs
  input  logic [NY-1:0] fifo_empty,
  output logic          fifo_rd,
  output logic [YW-1:0] fifo_row,
  input  logic [NX-1:0] fifo_data,
  // CorrPEs (all run in lock step)
  output logic          pe_start,
  output logic [NX-1:0] pe_sample,
  input  logic          pe_busy,
  input  logic          pe_done,
  output logic          swap,
  output logic [YW-1:0] cur_row,
  // context exchange
  output logic          ex_start,
  output logic          ex_wb_en,
  output logic [YW-1:0] ex_wb_row,
  output logic [YW-1:0] ex_ld_row,
  input  logic          ex_busy,
  // status
  output logic          stall,
  output logic          switched
);

  typedef enum logic [2:0] {INIT_LD0, INIT_WAIT0, INIT_LD1, RUN} state_e;
  state_e state;

  logic          nb_v;        // prefetched sample held
  logic [NX-1:0] nb_data;
  logic          rd_pend;     // FIFO read issued last cycle
  logic [BW-1:0] batch;       // samples taken from the current row

  function automatic logic [YW-1:0] next_row(logic [YW-1:0] y, int unsigned k);
    return YW'((int'(y) + k) % NY);
  endfunction

  logic pe_free, can_rd, want_switch, do_switch;
  assign pe_free     = !pe_busy || pe_done;
  assign pe_start    = (state == RUN) && nb_v && pe_free;
  assign pe_sample   = nb_data;
  assign can_rd      = (state == RUN) && !rd_pend && (!nb_v || pe_start)
                       && !fifo_empty[cur_row] && (int'(batch) < BATCH);
  assign fifo_rd     = can_rd;
  assign fifo_row    = cur_row;
  assign want_switch = (state == RUN) && !nb_v && !rd_pend && !pe_busy
                       && (fifo_empty[cur_row] || int'(batch) >= BATCH);
  assign do_switch   = want_switch && !ex_busy;
  assign stall       = want_switch && ex_busy;
  assign switched    = do_switch;

  always_comb begin
    swap      = 1'b0;
    ex_start  = 1'b0;
    ex_wb_en  = 1'b0;
    ex_wb_row = cur_row;
    ex_ld_row = cur_row;
    unique case (state)
      INIT_LD0: begin
        ex_start  = 1'b1;
        ex_ld_row = '0;
      end
      INIT_WAIT0: if (!ex_busy) swap = 1'b1;
      INIT_LD1: begin
        ex_start  = 1'b1;
        ex_ld_row = next_row('0, 1);
      end
      RUN: if (do_switch) begin
        swap      = 1'b1;
        ex_start  = 1'b1;
        ex_wb_en  = 1'b1;
        ex_wb_row = cur_row;
        ex_ld_row = next_row(cur_row, 2);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= INIT_LD0;
      cur_row <= '0;
      nb_v    <= 1'b0;
      nb_data <= '0;
      rd_pend <= 1'b0;
      batch   <= '0;
    end else begin
      unique case (state)
        INIT_LD0:   state <= INIT_WAIT0;
        INIT_WAIT0: if (!ex_busy) state <= INIT_LD1;
        INIT_LD1:   state <= RUN;
        default: ;
      endcase
      rd_pend <= can_rd;
      if (can_rd) batch <= batch + 1'b1;
      if (rd_pend) begin
        nb_v    <= 1'b1;
        nb_data <= fifo_data;
      end else if (pe_start) begin
        nb_v <= 1'b0;
      end
      if (do_switch) begin
        cur_row <= next_row(cur_row, 1);
        batch   <= '0;
      end
    end
  end

  // A switch never happens with a sample in flight.
  assert property (@(posedge clk) disable iff (!rst_n) (do_switch) |-> (!nb_v && !rd_pend && !can_rd))
    else $error("switch with pending sample");

endmodule

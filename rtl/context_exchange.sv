// context_exchange: swaps pixel contexts between the context store and the
// idle halves of the CorrPEs' L1 caches.
//
// All NX CorrPEs work on the contexts of one image row (pixel (x, y) has
// context number y*NX + x). After the pixel scheduler has swapped the L1
// buffers, the idle buffer of every CorrPE still holds the context of the
// row just finished; this unit writes those NX contexts back to the context
// store and then fills the idle buffers with the contexts of the row that
// comes next, so the CorrPEs never wait for the memory as long as a batch
// lasts longer than the exchange. A row that was never written back has no
// context in the store yet and is loaded as zeros, which clears the
// correlators after reset without a separate pass over the memory.
//
// Every word written back also appears on the result port when `res_en`
// is set: this is the stream of intermediate and final results for the
// host (it taps the path between the contexts and the L1 caches, as in the
// system diagram). The stream has no back-pressure.
//
// Sequence per CorrPE x: WB - read its idle L1 buffer word by word through
// port B (two-cycle latency) and write each word to the store; LD - read
// the store (one-cycle latency) and write each word to port B. WB is
// skipped when `wb_en` is low. About NX*(2*WORDS+4) cycles per exchange.
// The double buffering and the tap for results follow the paper; the
// ordering, the zero-fill and the timing are this design's own.
//
// Lint note: the delayed word counters w_wb/w_ld are one bit wider than a
// word address so that they can run below zero at the start of a pass;
// their top bit is therefore not used as an address bit.
module context_exchange #(
  parameter int unsigned NX    = 32,
  parameter int unsigned NY    = 32,
  parameter int unsigned WORDS = 128,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned XW = $clog2(NX),
  localparam int unsigned YW = $clog2(NY),
  localparam int unsigned AW = $clog2(WORDS),
  localparam int unsigned CW = $clog2(NX * NY)
) (
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             start,
  input  logic             wb_en,
  input  logic [YW-1:0]    wb_row,
  input  logic [YW-1:0]    ld_row,
  output logic             busy,
  // L1 port B of every CorrPE (address and data shared, write per CorrPE)
  output logic [AW-1:0]    l1_addr,
  output logic [NX-1:0]    l1_we,
  output logic [WIDTH-1:0] l1_wdata,
  input  logic [WIDTH-1:0] l1_rdata [NX],
  // context store
  output logic [CW-1:0]    cs_ctx,
  output logic [AW-1:0]    cs_word,
  output logic             cs_we,
  output logic [WIDTH-1:0] cs_wdata,
  input  logic [WIDTH-1:0] cs_rdata,
  // result stream
  input  logic             res_en,
  output logic             res_valid,
  output logic [CW-1:0]    res_ctx,
  output logic [AW-1:0]    res_word,
  output logic [WIDTH-1:0] res_data
);

  typedef enum logic [1:0] {IDLE, WB, LD} state_e;
  state_e state;

  logic [XW-1:0] x;
  logic [AW:0]   w;             // issue counter, runs to WORDS + latency
  logic          wb_q;
  logic [YW-1:0] wb_row_q, ld_row_q;
  logic [NY-1:0] stored;        // row has a context in the store

  localparam int unsigned WB_LAT = 2;   // L1 port B read latency
  localparam int unsigned LD_LAT = 1;   // store read latency

  assign busy = (state != IDLE);

  function automatic logic [CW-1:0] ctx_of(logic [YW-1:0] y, logic [XW-1:0] xx);
    return CW'(y) * CW'(NX) + CW'(xx);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      x        <= '0;
      w        <= '0;
      wb_q     <= 1'b0;
      wb_row_q <= '0;
      ld_row_q <= '0;
      stored   <= '0;
    end else begin
      unique case (state)
        IDLE: if (start) begin
          wb_q     <= wb_en;
          wb_row_q <= wb_row;
          ld_row_q <= ld_row;
          x        <= '0;
          w        <= '0;
          state    <= wb_en ? WB : LD;
          if (wb_en) stored[wb_row] <= 1'b1;
        end
        WB: if (int'(w) == WORDS - 1 + WB_LAT) begin
          w     <= '0;
          state <= LD;
        end else w <= w + 1'b1;
        LD: if (int'(w) == WORDS - 1 + LD_LAT) begin
          w <= '0;
          if (int'(x) == NX - 1) begin
            state <= IDLE;
          end else begin
            x     <= x + 1'b1;
            state <= wb_q ? WB : LD;
          end
        end else w <= w + 1'b1;
        default: state <= IDLE;
      endcase
    end
  end

  // Word whose read data arrive in this cycle.
  logic [AW:0] w_wb, w_ld;
  assign w_wb = w - (AW+1)'(WB_LAT);
  assign w_ld = w - (AW+1)'(LD_LAT);

  logic wb_data_v, ld_data_v;
  assign wb_data_v = (state == WB) && (int'(w) >= WB_LAT);
  assign ld_data_v = (state == LD) && (int'(w) >= LD_LAT);

  always_comb begin
    l1_addr  = '0;
    l1_we    = '0;
    l1_wdata = '0;
    cs_ctx   = '0;
    cs_word  = '0;
    cs_we    = 1'b0;
    cs_wdata = '0;
    if (state == WB) begin
      l1_addr = w[AW-1:0];                       // read issue
      if (wb_data_v) begin                       // write back
        cs_ctx   = ctx_of(wb_row_q, x);
        cs_word  = w_wb[AW-1:0];
        cs_we    = 1'b1;
        cs_wdata = l1_rdata[x];
      end
    end else if (state == LD) begin
      cs_ctx  = ctx_of(ld_row_q, x);
      cs_word = w[AW-1:0];                       // read issue
      if (ld_data_v) begin
        l1_addr  = w_ld[AW-1:0];
        l1_we[x] = 1'b1;
        l1_wdata = stored[ld_row_q] ? cs_rdata : '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_ctx   <= '0;
      res_word  <= '0;
      res_data  <= '0;
    end else begin
      res_valid <= res_en && wb_data_v;
      res_ctx   <= ctx_of(wb_row_q, x);
      res_word  <= w_wb[AW-1:0];
      res_data  <= l1_rdata[x];
    end
  end

  initial assert (NY >= 2) else $error("double buffering needs at least two rows");

endmodule

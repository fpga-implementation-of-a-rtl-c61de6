// row_reorder: one FIFO per image row between the sensor and the CorrPEs.
//
// Frames leave the sensor row by row, but the CorrPEs (one per column) work
// on the contexts of one row at a time and may stay on it for a batch of
// many samples. Every incoming row is therefore appended to the FIFO of its
// row index; the pixel scheduler reads the FIFO of the row it is working on
// and hands bit x of each entry to CorrPE x. NY FIFOs of DEPTH entries of
// NX bits (32 x 2048 x 32 bits = 256 KB) share one memory, which the
// published system keeps in a second external SRAM; here it is an array
// with one write and one read port.
//
// Write side: `in_valid` with `in_row`, `in_data`; a row whose FIFO is full
// is dropped and `overflow` pulses. Read side: `rd_en` with `rd_row` pops
// that FIFO, data on `rd_data` one edge later. `empty[y]` and `full[y]` are
// per-FIFO flags. The FIFO count, sizes and memory location follow the
// paper; dropping on overflow and the port timing are this design's choice.
//
// Lint note: the assertion at the end is off during reset
// (`disable iff (!rst_n)`), so lint sees rst_n in asynchronous and in
// clocked (assertion-only) use.
module row_reorder #(
  parameter int unsigned NX    = 32,
  parameter int unsigned NY    = 32,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned YW = $clog2(NY),
  localparam int unsigned DW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [YW-1:0] in_row,
  input  logic [NX-1:0] in_data,
  output logic          overflow,
  input  logic          rd_en,
  input  logic [YW-1:0] rd_row,
  output logic [NX-1:0] rd_data,
  output logic [NY-1:0] empty,
  output logic [NY-1:0] full
);

  initial assert (DEPTH == 2 ** DW) else $error("DEPTH must be a power of two");

  logic [NX-1:0] mem [NY * DEPTH];
  logic [DW:0]   wptr [NY];
  logic [DW:0]   rptr [NY];

  always_comb begin
    for (int y = 0; y < NY; y++) begin
      empty[y] = (wptr[y] == rptr[y]);
      full[y]  = (wptr[y][DW-1:0] == rptr[y][DW-1:0]) && (wptr[y][DW] != rptr[y][DW]);
    end
  end

  logic do_wr, do_rd;
  assign do_wr    = in_valid && !full[in_row];
  assign do_rd    = rd_en && !empty[rd_row];
  assign overflow = in_valid && full[in_row];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int y = 0; y < NY; y++) begin
        wptr[y] <= '0;
        rptr[y] <= '0;
      end
    end else begin
      if (do_wr) wptr[in_row] <= wptr[in_row] + 1'b1;
      if (do_rd) rptr[rd_row] <= rptr[rd_row] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[{in_row, wptr[in_row][DW-1:0]}] <= in_data;
    if (do_rd) rd_data <= mem[{rd_row, rptr[rd_row][DW-1:0]}];
  end

  // The scheduler only pops a FIFO it has seen non-empty.
  assert property (@(posedge clk) disable iff (!rst_n) (rd_en) |-> (!empty[rd_row]))
    else $error("read from empty row FIFO");

endmodule

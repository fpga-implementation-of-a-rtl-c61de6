// data_acq: reads binary frames from the SPAD array.
//
// Every FRAME_CYCLES clock cycles (10 us at 144 MHz: one 32x32 frame of
// 1-bit pixels, "photon / no photon in the last frame time") the unit reads
// the NY rows of the sensor one after the other and passes each row, with
// its index, both to the row reordering FIFOs and to the raw-data stream
// for the host. The sensor is modelled as a row-addressed port: `spad_rd`
// with `spad_row` requests a row, whose NX bits arrive on `spad_data` one
// cycle later. The frame period and image size follow the paper; the
// sensor interface is not described there and is this design's assumption.
//
// Outputs, registered: `row_valid`, `row_idx`, `row_data`, `row_sof` (first
// row of a frame), two cycles after the row request, and a frame counter.
// `enable` starts and stops acquisition at frame boundaries.
module data_acq #(
  parameter int unsigned NX           = 32,
  parameter int unsigned NY           = 32,
  parameter int unsigned FRAME_CYCLES = 1440,
  localparam int unsigned YW = $clog2(NY),
  localparam int unsigned FW = $clog2(FRAME_CYCLES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable,
  // sensor
  output logic          spad_rd,
  output logic [YW-1:0] spad_row,
  input  logic [NX-1:0] spad_data,
  // row stream
  output logic          row_valid,
  output logic [YW-1:0] row_idx,
  output logic [NX-1:0] row_data,
  output logic          row_sof,
  output logic [31:0]   frame_cnt
);

  initial assert (FRAME_CYCLES > NY + 1) else $error("frame period shorter than readout");

  logic [FW-1:0] tick;
  logic          reading;
  logic [YW-1:0] y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick      <= '0;
      reading   <= 1'b0;
      y         <= '0;
      frame_cnt <= '0;
    end else begin
      if (int'(tick) == FRAME_CYCLES - 1) tick <= '0;
      else                                tick <= tick + 1'b1;
      if (tick == '0 && enable) begin
        reading <= 1'b1;
        y       <= '0;
      end else if (reading) begin
        if (int'(y) == NY - 1) begin
          reading   <= 1'b0;
          frame_cnt <= frame_cnt + 1;
        end
        y <= y + 1'b1;
      end
    end
  end

  assign spad_rd  = reading;
  assign spad_row = y;

  // The sensor answers a request during the following cycle; its data are
  // registered here, and the row index and flags are delayed to match.
  logic          rd_q;
  logic [YW-1:0] y_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q      <= 1'b0;
      y_q       <= '0;
      row_valid <= 1'b0;
      row_idx   <= '0;
      row_sof   <= 1'b0;
      row_data  <= '0;
    end else begin
      rd_q      <= reading;
      y_q       <= y;
      row_valid <= rd_q;
      row_idx   <= y_q;
      row_sof   <= rd_q && (y_q == '0);
      row_data  <= spad_data;
    end
  end

endmodule

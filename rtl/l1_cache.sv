// l1_cache: double-buffered, dual-port context RAM of one CorrPE.
//
// Two buffers of WORDS x WIDTH bits. Port A belongs to the CorrPE and always
// addresses the active buffer; port B belongs to the context exchange and
// always addresses the other one, so the next pixel context can be loaded
// and the previous one written back while the CorrPE works. A one-cycle
// pulse on `swap` exchanges the roles of the two buffers.
//
// Timing on both ports: the address (and write data with `we`) is taken at
// the clock edge that ends the "Load"/"Store" cycle; read data appear two
// edges after the address (RAM read plus output register), matching the
// Load - Wait - Multiply spacing of the CorrPE pipeline. Writes take effect
// at the edge; a read of the same word in the same cycle returns old data.
// The double buffering and the dual-port RAM are the paper's; the latency
// and the swap pulse are this design's choices.
module l1_cache #(
  parameter int unsigned WORDS = 128,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             swap,
  output logic             active,   // index of the buffer port A uses
  // port A: CorrPE
  input  logic [AW-1:0]    a_addr,
  input  logic             a_we,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // port B: context exchange
  input  logic [AW-1:0]    b_addr,
  input  logic             b_we,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);

  logic [WIDTH-1:0] mem [2*WORDS];
  logic [WIDTH-1:0] a_q, b_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    active <= 1'b0;
    else if (swap) active <= ~active;
  end

  // Port A and port B never address the same buffer, so the two writes
  // below can not collide.
  always_ff @(posedge clk) begin
    if (a_we) mem[{active, a_addr}]  <= a_wdata;
    if (b_we) mem[{~active, b_addr}] <= b_wdata;
    a_q <= mem[{active, a_addr}];
    b_q <= mem[{~active, b_addr}];
  end

  always_ff @(posedge clk) begin
    a_rdata <= a_q;
    b_rdata <= b_q;
  end

endmodule

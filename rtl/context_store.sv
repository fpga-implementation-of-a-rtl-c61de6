// context_store: background memory holding the contexts of all pixels.
//
// NCTX contexts of WORDS words of WIDTH bits (1024 x 128 x 64 bits for the
// 32x32 array). In the published system this is an external SRAM next to
// the correlator FPGA; here it is a plain synchronous single-port RAM
// written as an array, so the design simulates on its own. One access per
// cycle: `we` writes `wdata` at {ctx, word}; otherwise the word is read and
// appears on `rdata` one clock edge later.
module context_store #(
  parameter int unsigned NCTX  = 1024,
  parameter int unsigned WORDS = 128,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned CW = $clog2(NCTX),
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic [CW-1:0]    ctx,
  input  logic [AW-1:0]    word,
  input  logic             we,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [NCTX * (2 ** AW)];

  always_ff @(posedge clk) begin
    if (we) mem[{ctx, word}] <= wdata;
    else    rdata <= mem[{ctx, word}];
  end

endmodule

// corr_pkg: constants and types shared by the multi-tau correlator array.
//
// The numbers are those of the 32x32 SPAD correlator: P = 8 lag channels in
// each of S = 14 linear correlator blocks (lag ratio m = 2), a pixel context
// of 128 words of 64 bits, 1-bit pixels, 16-bit delay registers and pair
// sums, 32-bit accumulators and monitors. The context word layout follows
// the published memory map: word s*P+p holds channel (s,p), then the status
// counter c, then S-1 hand-over words between consecutive blocks, then the
// global and the local monitor. The packing of the hand-over word (two
// 16-bit pair sums, "ready" and "partial", for each of the two inputs) and
// the bit positions inside the channel word are this design's own choice.
//
// Lint note: linted on its own, this package reports WORD_W and CNT_W as
// unused; the modules that import it use them.
package corr_pkg;

  localparam int unsigned WORD_W  = 64;  // context word width
  localparam int unsigned DATA_W  = 16;  // delay register / pair-sum width
  localparam int unsigned ACC_W   = 32;  // accumulator and monitor width
  localparam int unsigned CNT_W   = 32;  // status counter c width

  // Address of each part of a pixel context for a correlator of S blocks of
  // P channels. For S=14, P=8 this gives 0..111, 112, 113..125, 126, 127.
  function automatic int unsigned chan_addr(int unsigned s, int unsigned p, int unsigned P);
    return s * P + p;
  endfunction
  function automatic int unsigned cnt_addr(int unsigned S, int unsigned P);
    return S * P;
  endfunction
  // hand-over word from block s to block s+1, s = 0..S-2
  function automatic int unsigned ho_addr(int unsigned s, int unsigned S, int unsigned P);
    return S * P + 1 + s;
  endfunction
  function automatic int unsigned mong_addr(int unsigned S, int unsigned P);
    return S * P + S;
  endfunction
  function automatic int unsigned monl_addr(int unsigned S, int unsigned P);
    return S * P + S + 1;
  endfunction
  function automatic int unsigned ctx_words(int unsigned S, int unsigned P);
    return S * P + S + 2;
  endfunction

  // One lag channel: delay register J^(l)_{s,p} in the upper half, raw
  // accumulator G_{tau_{s,p}} in the lower half.
  typedef struct packed {
    logic [15:0]       unused;
    logic [DATA_W-1:0] delay;
    logic [ACC_W-1:0]  acc;
  } chan_word_t;

  // Hand-over between block s and s+1: the completed pair sum ("ready",
  // consumed by block s+1) and the first half of the pair being formed.
  typedef struct packed {
    logic [DATA_W-1:0] ready_g;
    logic [DATA_W-1:0] ready_l;
    logic [DATA_W-1:0] part_g;
    logic [DATA_W-1:0] part_l;
  } ho_word_t;

endpackage

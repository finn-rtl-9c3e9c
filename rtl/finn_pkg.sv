// finn_pkg: types and helper functions shared by the binarized-network
// streaming blocks.
//
// The parameter-load command (ld_t) is the one bundle every layer of the
// accelerator receives: it writes one word of a PE's weight memory or one
// entry of its threshold memory. Loading parameters through a port is this
// design's own choice; in the original flow the trained weights and thresholds
// are fixed when the accelerator is generated.
package finn_pkg;

  // Widest parameter word a load command carries (largest SIMD width of the
  // CNV configuration is 64 lanes; thresholds are at most 16 bits).
  localparam int unsigned LD_DATA_W = 64;

  typedef struct packed {
    logic                 en;     // one write this cycle
    logic                 thr;    // 1: threshold memory, 0: weight memory
    logic [3:0]           layer;  // which MVTU of the network
    logic [7:0]           pe;     // which PE of that MVTU
    logic [15:0]          addr;   // word address inside the PE memory
    logic [LD_DATA_W-1:0] data;   // weight word (S lanes) or threshold
  } ld_t;

  // Accumulator width needed for a dot product of mw lanes of ibits-bit
  // unsigned inputs with +-1 weights, plus a sign bit. For binary inputs this
  // is the paper's T = 1 + log2(Y).
  function automatic int unsigned acc_width(int unsigned mw, int unsigned ibits);
    longint unsigned maxval;
    maxval = longint'(mw) * ((longint'(1) << ibits) - 1);
    return $clog2(maxval + 1) + 1;
  endfunction

endpackage

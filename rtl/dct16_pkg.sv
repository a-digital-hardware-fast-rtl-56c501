// dct16_pkg -- constants shared by the 16-point approximate DCT datapath.
//
// The transform T is a 16x16 matrix with entries in {-1, 0, +1}; its fast
// algorithm is a chain of butterflies (B_16, B_8, B_4, B_2) on the even
// half and two small adder networks, Block A (matrix E) and Block B (matrix
// O), on the remaining rows. Every adder level widens the word by one bit,
// so a W-bit input gives W+GROWTH-bit outputs that can never overflow.
//
// OUT_INDEX lists, for each internal output position of the flow graph, the
// coefficient index it carries (the permutation P of the factorisation):
// positions 0..3 are X0, X8, X4, X12, positions 4..7 are Block A's X2, X6,
// X10, X14, and positions 8..15 are Block B's X1, X3, ..., X15.
// The pipeline depth (LATENCY) is a choice of this implementation.
package dct16_pkg;

  localparam int unsigned DCT_N     = 16;  // transform length
  localparam int unsigned W_DEFAULT = 8;   // input word length of the main configuration
  localparam int unsigned GROWTH    = 4;   // output bits added over the input word length
  localparam int unsigned LATENCY   = 3;   // input, mid and output register ranks

  typedef int unsigned index_t;

  localparam index_t OUT_INDEX [DCT_N] = '{
    0, 8, 4, 12,                 // B_2 and B-bar_2 outputs
    2, 6, 10, 14,                // Block A
    1, 3, 5, 7, 9, 11, 13, 15    // Block B
  };

endpackage

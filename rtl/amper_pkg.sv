// amper_pkg: types and constants shared by the AMPER accelerator.
//
// Q is the width of a priority and of every datapath word (32 bits, as in
// the evaluated design). Scaling factors (lambda, lambda'/m) are unsigned
// fixed point with FRAC fraction bits; FRAC = 16 is this design's choice.
// A ternary search query is carried as a data word plus a don't-care word.
package amper_pkg;

  localparam int unsigned Q    = 32;   // priority / datapath width
  localparam int unsigned FRAC = 16;   // fraction bits of lambda and lambda'/m
  localparam int unsigned DIST_W = $clog2(Q + 1);  // mismatch count width

  typedef logic [Q-1:0] word_t;

  // Ternary query: bit j is "don't care" when dc[j] = 1.
  typedef struct packed {
    word_t data;
    word_t dc;
  } query_t;

  // Sampling variant.
  typedef enum logic {
    MODE_KNN  = 1'b0,   // k-nearest neighbour, best-match TCAM sensing
    MODE_FRNN = 1'b1    // fixed-radius NN, prefix query, exact-match sensing
  } mode_e;

endpackage

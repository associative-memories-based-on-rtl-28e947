// scn_pkg: constants, types and index helpers shared by the multiple-valued
// sparse clustered network (MV-SCN) associative memory.
//
// The network has C clusters of L = 2**KAPPA nodes each; a K = C*KAPPA bit
// message activates one node per cluster. Connections exist only between
// nodes of different clusters and are stored once per unordered cluster pair
// (a, b) with a < b, numbered 0 .. C*(C-1)/2-1 by pair_idx(). Inside a pair
// block, element [ja][jb] is the connection between node ja of cluster a and
// node jb of cluster b.
//
// Paper values: c = 8 clusters, n = 128 nodes (l = 16, kappa = 4), w_MAX = 3,
// sigma = c, gamma = 1. The command encoding and the mode encoding are this
// design's own.
package scn_pkg;

  localparam int unsigned C_DEF     = 8;   // clusters
  localparam int unsigned KAPPA_DEF = 4;   // bits per sub-message
  localparam int unsigned L_DEF     = 16;  // nodes per cluster = 2**KAPPA
  localparam int unsigned WMAX_DEF  = 3;   // largest weight value
  localparam int unsigned GAMMA_DEF = 1;   // memory effect
  localparam int unsigned ITW_DEF   = 4;   // width of the iteration limit

  // Command of the memory's request port.
  typedef enum logic [1:0] {
    OP_STORE    = 2'd0,  // add a message (increment its clique)
    OP_DELETE   = 2'd1,  // remove a message (decrement its clique)
    OP_RETRIEVE = 2'd2   // decode a partial message
  } op_e;

  // Global decoding rule used for a retrieval.
  typedef enum logic {
    MODE_ARCH2 = 1'b0,   // normalised weights, score + winner-take-all
    MODE_ARCH3 = 1'b1    // normalised weights, AND of ORs
  } mode_e;

  // Number of unordered cluster pairs.
  function automatic int unsigned n_pairs(input int unsigned c);
    return c * (c - 1) / 2;
  endfunction

  // Index of the unordered pair {a, b}, a != b.
  function automatic int unsigned pair_idx(input int unsigned a,
                                           input int unsigned b,
                                           input int unsigned c);
    int unsigned lo, hi;
    lo = (a < b) ? a : b;
    hi = (a < b) ? b : a;
    return lo * c - lo * (lo + 1) / 2 + (hi - lo - 1);
  endfunction

  // Width of an Architecture II score: at most one per other cluster plus
  // gamma.
  function automatic int unsigned score_width(input int unsigned c,
                                              input int unsigned gamma);
    return bits_for(c - 1 + gamma);
  endfunction

  // Bits needed to hold 0 .. v.
  function automatic int unsigned bits_for(input int unsigned v);
    return (v < 2) ? 1 : $clog2(v + 1);
  endfunction

endpackage

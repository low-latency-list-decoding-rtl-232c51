// polar_pkg: constants and types shared by the list decoder blocks.
//
// The default sizes are those of the implemented decoder: code length
// N = 1024, list size L = 16, M = 64 processing elements per successive-
// cancellation datapath, 6-bit LLRs and 8-bit path metrics. The controller
// state type and the node-operation type are defined here so that the
// controller, the datapath and the testbenches agree on them.
package polar_pkg;

  localparam int unsigned N_DEFAULT     = 1024;
  localparam int unsigned L_DEFAULT     = 16;
  localparam int unsigned M_DEFAULT     = 64;
  localparam int unsigned LLR_W_DEFAULT = 6;
  localparam int unsigned PM_W_DEFAULT  = 8;
  localparam int unsigned CRC_W_DEFAULT = 16;
  // CRC-16-CCITT generator x^16 + x^12 + x^5 + 1 (choice of this design).
  localparam logic [15:0] CRC_POLY_DEFAULT = 16'h1021;

  // Controller states: a scheduling-tree node (f or g, one chunk of M
  // outputs per cycle), the pruning cycle, the copy cycle, the one-cycle
  // frozen-sibling metric update, and the final CRC selection.
  typedef enum logic [2:0] {
    ST_IDLE  = 3'd0,
    ST_NODE  = 3'd1,
    ST_DTS   = 3'd2,
    ST_LCP   = 3'd3,
    ST_FSPMU = 3'd4,
    ST_CRC   = 3'd5
  } ctrl_state_e;

endpackage

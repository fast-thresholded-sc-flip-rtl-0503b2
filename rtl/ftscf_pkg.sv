// ftscf_pkg: shared constants, types and helper functions of the Fast-TSCF
// polar decoder.
//
// The code and flipping constants (N = 1024, K = 512, CRC-16 with polynomial
// 0x1021, T_max = 10) are the configuration evaluated in the paper this
// decoder follows.  The quantisation (6-bit channel LLRs, 7-bit internal
// LLRs, one fractional bit), the processing parallelism P = 64 and the 0.5 dB
// resolution of the channel-quality input are this design's own choices: the
// paper keeps them equal to an earlier Fast-SCF decoder without stating them.
package ftscf_pkg;

  // Code configuration of the evaluated decoder.
  localparam int unsigned N_DEF      = 1024;  // code length
  localparam int unsigned K_DEF      = 512;   // information bits incl. CRC
  localparam int unsigned CRC_LEN    = 16;    // C
  localparam logic [15:0] CRC_POLY   = 16'h1021;
  localparam int unsigned TMAX_DEF   = 10;    // extra decoding attempts

  // Implementation choices (not given by the paper).
  localparam int unsigned P_DEF      = 64;    // processing elements / LLR word
  localparam int unsigned QC_DEF     = 6;     // channel LLR bits
  localparam int unsigned QI_DEF     = 7;     // internal LLR bits
  localparam int unsigned LLR_FRAC   = 1;     // fractional bits of every LLR
  localparam int unsigned SNR_W_DEF  = 8;     // signed Eb/N0 input width
  localparam int unsigned SNR_FRAC   = 1;     // Eb/N0 input in 0.5 dB steps
  localparam int unsigned OMEGA_W    = 10;    // threshold width (LLR units)

  // Kind of a sub-tree (node) of the decoding tree.
  typedef enum logic [2:0] {
    NODE_NONE = 3'd0,  // no special pattern: traverse further down
    NODE_R0   = 3'd1,  // Rate-0: every leaf frozen
    NODE_R1   = 3'd2,  // Rate-1: no leaf frozen
    NODE_REP  = 3'd3,  // repetition: only the last leaf is information
    NODE_SPC  = 3'd4   // single parity check: only the first leaf is frozen
  } node_kind_e;

  // Controller states of the decoder.
  typedef enum logic [3:0] {
    ST_IDLE, ST_LOAD, ST_DESC, ST_NODE, ST_UP, ST_G, ST_CRC, ST_CRC_WAIT,
    ST_DONE
  } dec_state_e;

  // Bit-flip candidate recorded during the first decoding attempt: the node is
  // identified by its first leaf index, `sel` picks the SPC subset
  // (0: eta_1, 1: eta_2; always 0 for Rate-1 and Rep nodes).
  typedef struct packed {
    logic [15:0] start;
    logic        sel;
  } flip_cand_t;

endpackage

`timescale 1ps / 1ps
// hbn_pkg -- types and constants shared by the HBN-PUF modules.
//
// Holds the controller state encoding, the register map of the host
// (Avalon-MM) interface, and the xorshift32 step used to draw the random
// network wiring and the optional per-node delay spread at elaboration time.
// Nothing here is taken from the paper except the idea that the wiring is a
// pseudo-random draw fixed when the design is built; the map, the encodings
// and the generator are this design's choices.
package hbn_pkg;

  // Avalon-MM data width of the host interface.
  localparam int unsigned CSR_DW = 32;

  // Word addresses of the register file (see hbn_avalon_csr).
  localparam int unsigned REG_CTRL      = 'h000;  // W: bit0 = start a query
  localparam int unsigned REG_STATUS    = 'h001;  // R: bit0 = busy, bit1 = done
  localparam int unsigned REG_TAP_SEL   = 'h002;  // RW: index of the response tap
  localparam int unsigned REG_INFO      = 'h003;  // R: [15:0] = N, [31:16] = M
  localparam int unsigned REG_CHAL_BASE = 'h040;  // RW: challenge words
  localparam int unsigned REG_RESP_BASE = 'h080;  // R: selected response words
  localparam int unsigned REG_BITS_BASE = 'h100;  // R: tap m, word w at BASE + 64*m + w
  localparam int unsigned REG_REGION    = 64;     // words per challenge/response/tap region

  // Phases of one challenge-response query.
  typedef enum logic [1:0] {
    ST_IDLE = 2'd0,  // Reset high, network held at the last challenge
    ST_HOLD = 2'd1,  // Reset high, new challenge applied, settling
    ST_RUN  = 2'd2   // Reset low, network evolves, delay line captures
  } ctrl_state_e;

  // One step of Marsaglia's xorshift32 generator (never returns 0 for s != 0).
  function automatic int unsigned xorshift32(int unsigned s);
    int unsigned v;
    v = s;
    v ^= v << 13;
    v ^= v >> 17;
    v ^= v << 5;
    return v;
  endfunction

endpackage

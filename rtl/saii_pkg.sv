// saii_pkg: types and default sizes shared by the SAII FM-index constructor.
//
// Bases are coded in two bits in lexical order (A<C<G<T). The end-of-string
// character $ has no code of its own: it is stored as A and its position is
// kept in a separate pointer, so the BWT costs two bits per character.
// The default sizes are those of the evaluated FPGA build: segments (and
// O-table sampling distance) of 2,048 characters and room for 131,072
// characters, i.e. 64 segments.
package saii_pkg;

  typedef enum logic [1:0] {
    BASE_A = 2'd0,
    BASE_C = 2'd1,
    BASE_G = 2'd2,
    BASE_T = 2'd3
  } base_t;

  // Default configuration (paper's FPGA build).
  localparam int unsigned SAII_K      = 2048;    // O-table sampling distance = segment length
  localparam int unsigned SAII_N_MAX  = 131072;  // BWT characters the BRAM holds, $ included
  localparam int unsigned SAII_GROUPS = 32;      // first-stage adders of the pop counter
  localparam int unsigned SAII_M      = 3;       // search latency in cycles

  // Controller states. The three search sub-states follow the
  // "1st stage pop count", "2nd stage pop count" and "Finish search"
  // bubbles of the state diagram.
  typedef enum logic [2:0] {
    ST_INIT   = 3'd0,   // Initial: clear, take the first base
    ST_POP1   = 3'd1,   // Search: 1st stage pop count
    ST_POP2   = 3'd2,   // Search: 2nd stage pop count
    ST_FIN    = 3'd3,   // Search: finish search (adds C + O + pop + 1)
    ST_UPD    = 3'd4,   // Update & Insert: take next base, start sweep
    ST_SWEEP  = 3'd5,   // Update & Insert: one segment rewritten per cycle
    ST_FINISH = 3'd6    // Finish: index complete, readable
  } state_t;

endpackage

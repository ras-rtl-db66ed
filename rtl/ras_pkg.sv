// ras_pkg: constants and types shared by the rANS accelerator.
//
// The coder keeps a 32-bit unsigned state and works on an alphabet of 256
// symbols (8-bit pixel values). Probabilities are quantised to PROB_BITS
// fractional bits, so frequencies sum to 2^PROB_BITS and the cumulative table
// C(0..256) needs PROB_BITS+1 bits. Re-normalisation is byte-wise and keeps
// the state in [RANS_L, 256*RANS_L).
//
// The 32-bit state follows the paper; PROB_BITS = 16 and RANS_L = 2^23 are
// this design's choices (the paper leaves n and L open).
package ras_pkg;

  localparam int unsigned STATE_BITS = 32;
  localparam int unsigned PROB_BITS  = 16;
  localparam int unsigned SYM_BITS   = 8;
  localparam int unsigned ALPHABET   = 1 << SYM_BITS;
  localparam int unsigned CUM_BITS   = PROB_BITS + 1;
  localparam logic [STATE_BITS-1:0] RANS_L = 32'h0080_0000;  // 2^23

  // Byte-pointer width of one low-bit memory bank and symbol count width.
  localparam int unsigned PTR_BITS   = 14;
  localparam int unsigned CNT_BITS   = 13;
  localparam int unsigned ROW_BITS   = 13;
  localparam int unsigned COL_BITS   = 7;

  typedef logic [STATE_BITS-1:0] state_t;
  typedef logic [PROB_BITS-1:0]  freq_t;
  typedef logic [CUM_BITS-1:0]   cum_t;
  typedef logic [SYM_BITS-1:0]   sym_t;
  typedef logic [PTR_BITS-1:0]   ptr_t;
  typedef logic [15:0]           bf16_t;

  // One entry of the middle-state memory: the state a coder stopped at and
  // the byte pointer of the low-bit memory bank at that moment.
  typedef struct packed {
    state_t state;
    ptr_t   ptr;
  } ms_entry_t;

  // Lane operating mode.
  typedef enum logic {
    MODE_ENC = 1'b0,
    MODE_DEC = 1'b1
  } lane_mode_e;

  // Response of the shared CDF table: C(x) and C(x+1).
  typedef struct packed {
    cum_t cum;
    cum_t cum_next;
  } cdf_pair_t;

endpackage

// rsa_pkg: types and constants shared by the raw-signal alignment pipeline.
//
// Currents (raw samples and event means) are unsigned fixed point in units
// of 1/16 pA (FRAC_BITS = 4), so 3 pA is 48 and 99.07 pA is about 1585.
// The seed length M = 10 events and the 128-bit hash width are the values
// the design is built around; the number formats are this design's own
// choice, since the analog chip has no digital word formats to follow.
package rsa_pkg;

  localparam int unsigned SAMPLE_W  = 16;   // current word width
  localparam int unsigned FRAC_BITS = 4;    // 1/16 pA resolution
  localparam int unsigned SEED_LEN  = 10;   // m consecutive events per seed
  localparam int unsigned HASH_W    = 128;  // LSH bits per seed
  localparam int unsigned COND_W    = 8;    // crossbar conductance code width
  localparam int unsigned VOTE_W    = 16;   // vote counter width
  localparam int unsigned G_W       = 8;    // conductance read-back, uS

  typedef logic [SAMPLE_W-1:0] current_t;

  // How the vote counts of one read are turned into a result.
  typedef enum logic [1:0] {
    DEC_THRESHOLD = 2'd0,   // detection: max votes above a vote threshold
    DEC_ARGMAX    = 2'd1,   // classification: location with most votes
    DEC_RATIO     = 2'd2    // mapping: max >= 2 x second and above a minimum
  } dec_mode_e;

  typedef enum logic [1:0] {
    RES_NONE    = 2'd0,     // read not assigned
    RES_SINGLE  = 2'd1,     // read assigned to res_loc
    RES_BETWEEN = 2'd2      // read assigned between res_loc and res_loc2
  } res_kind_e;

  // Operation requested from the analog array during programming.
  typedef enum logic [1:0] {
    DEV_IDLE  = 2'd0,
    DEV_READ  = 2'd1,       // 0.2 V read of one cell
    DEV_SET   = 2'd2,       // SET pulse (raises conductance)
    DEV_RESET = 2'd3        // RESET pulse (lowers conductance)
  } dev_op_e;

endpackage

// asch_pkg: constants and types shared by the ASCH-PUF (automatic self-checking
// and healing PUF) blocks.
//
// The array geometry (32 rows of 128 cells, read a whole row at a time), the
// 8-bit DAC, the 4-bit PWM dither (12-bit V1 resolution), the 5-vote comparator
// majority and the 64 evaluations per skew session are the paper's numbers.
// The map-row encoding (one heal bit and one mask bit per column) is this
// design's choice.
package asch_pkg;

  localparam int unsigned PUF_ROWS  = 32;   // word lines
  localparam int unsigned PUF_COLS  = 128;  // bit lines, read in parallel
  localparam int unsigned DAC_BITS  = 8;    // resistive DAC
  localparam int unsigned PWM_BITS  = 4;    // dither bits
  localparam int unsigned LOCK_BITS = DAC_BITS + PWM_BITS;  // 12-bit V1 setting
  localparam int unsigned N_VOTES   = 5;    // comparator activations per step
  localparam int unsigned N_EVAL_SESSION = 64;   // PUF evaluations per skew session

  // Stabilization mode: static (map in NVM, made at enrollment) or dynamic
  // (map in the on-chip SRAM LUT, remade at every power-up).
  typedef enum logic {
    MODE_S_ASCH = 1'b0,
    MODE_D_ASCH = 1'b1
  } asch_mode_e;

  // One row of the heal/mask map. heal[c]=1: column c was dark as an original
  // 4-stage cell but stable as a healed 3-stage cell, so read it healed.
  // mask[c]=1: dark in both configurations, never used for a key.
  typedef struct packed {
    logic [PUF_COLS-1:0] heal;
    logic [PUF_COLS-1:0] mask;
  } map_row_t;

  // Majority of an odd number of votes.
  function automatic logic majority(input logic [N_VOTES-1:0] v);
    int unsigned ones;
    ones = 0;
    for (int i = 0; i < N_VOTES; i++) ones += v[i];
    return ones > N_VOTES / 2;
  endfunction

endpackage

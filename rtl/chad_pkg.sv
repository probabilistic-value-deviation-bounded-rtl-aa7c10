// chad_pkg -- shared constants and types of the bit-level channel adaptation
// controller.
//
// The controller switches a channel modulating device (a digitally controlled
// potentiometer used as the pull-up of a serial data line) to a different
// setting for every bit position of a serially transmitted L-bit word. The
// word length L and the selection width N default to the values of the
// reference configuration: 8-bit sensor samples and an 8-bit (256-level)
// potentiometer selection. The two-state synchroniser (idle s0, counting s1)
// follows the reference state machine; its binary encoding is this design's
// choice.
package chad_pkg;

  // Longest word (in bits) whose positions get their own selection register.
  localparam int unsigned L_DEFAULT = 8;

  // Width of the selection driven to the channel modulating hardware.
  localparam int unsigned N_DEFAULT = 8;

  // Number of sources (sensors) with their own adaptation table.
  localparam int unsigned S_DEFAULT = 1;

  // Selection loaded into every register at reset. Code 10 of a 256-step,
  // 100 kOhm potentiometer is about 3.92 kOhm, the conventional, reliable
  // I2C pull-up value; it keeps the bus error free until configured.
  localparam int unsigned RESET_SEL_DEFAULT = 10;

  // Synchroniser states: S0 waits for the start of a word, S1 counts bits.
  typedef enum logic {
    S0_IDLE  = 1'b0,
    S1_COUNT = 1'b1
  } sync_state_e;

endpackage : chad_pkg

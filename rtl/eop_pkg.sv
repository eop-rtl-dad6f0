// eop_pkg: types and constants shared by the encrypted board-link design.
//
// The operating phase follows the three-phase test procedure of the link:
// initialization (waiting for configuration), execution (traffic runs) and
// pause (everything holds, violation counters are reported). The numeric
// codes 0, 1 and 2 are the values the phase select signal takes in the
// published simulation trace. The data-source mode selects whether all data
// paths change at one common rate or each at its own rate.
package eop_pkg;

  typedef enum logic [1:0] {
    PH_INIT  = 2'd0,
    PH_EXEC  = 2'd1,
    PH_PAUSE = 2'd2
  } phase_e;

  typedef enum logic {
    MODE_UNIFORM = 1'b0,
    MODE_RANDOM  = 1'b1
  } src_mode_e;

  // Trivium key and IV lengths (Trivium specification).
  localparam int unsigned KEY_W = 80;
  localparam int unsigned IV_W  = 80;
  localparam int unsigned STATE_W = 288;
  localparam int unsigned SEED_W  = KEY_W + IV_W;

  // Rate of one data path in MHz; 8 bits cover 5..200 MHz.
  typedef logic [7:0] mhz_t;

endpackage

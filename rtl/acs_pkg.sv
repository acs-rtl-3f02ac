// acs_pkg: types and constants shared by the out-of-order kernel scheduler.
//
// Kernel identifiers are 8 bits wide, as in the scheduler described for the
// hardware/software cooperative design. A window slot carries a 2-bit state.
// The three kernel states (pending, ready, executing) come from the design;
// using the fourth code of the 2-bit field to mark an empty slot is a choice
// of this implementation.
package acs_pkg;

  localparam int unsigned KID_W = 8;

  typedef logic [KID_W-1:0] kid_t;

  typedef enum logic [1:0] {
    SLOT_FREE      = 2'd0,
    SLOT_PENDING   = 2'd1,
    SLOT_READY     = 2'd2,
    SLOT_EXECUTING = 2'd3
  } slot_state_e;

endpackage

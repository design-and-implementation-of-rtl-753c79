// parking_pkg -- types and default sizes shared by the parking-system blocks.
//
// The lot has 32 slots, the number of the integrated design (led, led_filled and
// led_reserv are 32 bits wide).  Each slot is in one of three states, empty, filled or
// reserved, as the design is described.  The 2-bit codes, the 2-bit card code width (the
// width of the w4 input of the top level), the 4-bit temporary-card number and the
// layout of the visit record are this design's own choices.
package parking_pkg;

  localparam int unsigned N_SLOTS_DEF = 32;  // slots in the lot
  localparam int unsigned SLOT_W      = 5;   // bits of a slot index (covers up to 32 slots)
  localparam int unsigned CARD_W      = 2;   // bits of a visitor card code (w4)
  localparam int unsigned TEMP_W      = 4;   // bits of a temporary-card number

  // Slot status.  The RF status report carries the same 2-bit code; 2'b11 is not a
  // status and a report carrying it is dropped.
  typedef enum logic [1:0] {
    SLOT_EMPTY    = 2'b00,
    SLOT_FILLED   = 2'b01,
    SLOT_RESERVED = 2'b10
  } slot_state_e;

  // One record per handled visitor, queued for the host computer.
  typedef struct packed {
    logic              new_member;  // 1: unknown card, a temporary card was issued
    logic [CARD_W-1:0] card;        // card code read at identification
    logic [TEMP_W-1:0] temp_card;   // temporary-card number (valid if new_member)
    logic              found;       // 1: a slot was allotted
    logic [SLOT_W-1:0] slot;        // allotted slot index, 0-based (valid if found)
  } visit_rec_t;


endpackage

// parking_system -- top level of the FPGA car-parking controller.
//
// A car arriving at the entrance (w3) is checked against the lot's space: if no slot is
// empty it is refused and the LCD reads "NO SPACE EXIT"; otherwise the LCD reads "SPACE
// AVAILABLE", the stepper turns the door open, the visitor's card (w4) is identified
// (member, or new member given a temporary card) and the slots are checked in order
// until an empty one is found and allotted.  Slot status arrives over an RF link from
// the IR sensors in the slots (HT12D data w2 and its valid-transmission strobe rf_vt)
// and drives one LED per slot for filled (led_filled) and reserved (led_reserv); led
// lights the slot just allotted.  A record of every admitted visitor is queued for the
// host computer.
//
// Blocks: parking_controller (sequence), rf_slot_receiver + slot_status (slot status),
// slot_checker (allotment), identification, interfacing (stepper_motor, lcd_controller),
// data_buffer (host queue).
//
// Ports: the names clk, reset, w2, w3, w4, led, led_filled, led_reserv, z, identified
// and new_member are those of the published top level.  z[6:0] drives the seven inputs
// of the ULN2003 driver: z[3:0] the door motor coils, z[6:4] unused and held at 0.  The
// LCD pins, rf_vt, temp_card and the host port are added: the published top level does
// not list them, nor the event and status outputs refused, admitted, rpt_error, clkd
// and lcd_ready.  reset is synchronous and active high.
//
// Parameters default to the published 32 slots; the timing defaults assume a 100 MHz
// clock.
//
// Timing: one car is handled at a time.  From w3 rising to `admitted`, the sequence
// takes the door rotation, DIV x (DOOR_STEPS + 1) cycles at most (about 127 ms at the
// defaults), plus about 10 cycles of hand-offs, 2 for identification and up to
// N_SLOTS + 1 for the slot search.
module parking_system
  import parking_pkg::*;
#(
  parameter int unsigned          N_SLOTS     = N_SLOTS_DEF,
  parameter int unsigned          DIV         = 250_000,
  parameter int unsigned          DOOR_STEPS  = 50,
  parameter int unsigned          T_POWERUP   = 1_500_000,
  parameter int unsigned          T_E_HIGH    = 25,
  parameter int unsigned          T_CMD       = 5_000,
  parameter int unsigned          T_CLEAR     = 200_000,
  parameter logic [2**CARD_W-1:0] MEMBER_MASK = 4'b1110,
  parameter int unsigned          BUF_DEPTH   = 16
) (
  input  logic               clk,
  input  logic               reset,
  input  logic [3:0]         w2,          // HT12D data D3..D0
  input  logic               rf_vt,       // HT12D valid transmission
  input  logic               w3,          // car at the entrance
  input  logic [CARD_W-1:0]  w4,          // visitor card code
  output logic [N_SLOTS-1:0] led,         // slot just allotted (one-hot)
  output logic [N_SLOTS-1:0] led_filled,
  output logic [N_SLOTS-1:0] led_reserv,
  output logic [6:0]         z,           // ULN2003 inputs
  output logic               identified,
  output logic               new_member,
  output logic [TEMP_W-1:0]  temp_card,
  output logic [7:0]         lcd_d,
  output logic               lcd_e,
  output logic               lcd_rs,
  output logic               lcd_rw,
  input  logic               host_rd,
  output visit_rec_t         host_rec,
  output logic               host_empty,
  output logic               host_overflow,
  output logic               refused,     // event: car turned away, no space
  output logic               admitted,    // event: car admitted and logged
  output logic               rpt_error,   // event: malformed RF report dropped
  output logic               clkd,        // stepper divided clock
  output logic               lcd_ready    // LCD shows the current status
);

  if (N_SLOTS < 1 || N_SLOTS > 2**SLOT_W) begin : g_bad_size
    $error("parking_system: N_SLOTS must be 1..32");
  end

  // RF reports and slot status
  logic               rpt_valid;
  logic [SLOT_W-1:0]  rpt_slot;
  slot_state_e        rpt_status;
  logic [N_SLOTS-1:0] slot_empty;
  logic               space_available;

  // sequence
  logic              door_start, door_done, ident_start, ident_done;
  logic              slot_start, slot_done, slot_found, alloc_we;
  logic [SLOT_W-1:0] slot;
  logic [CARD_W-1:0] person;
  logic              log_push;
  visit_rec_t        log_rec;
  logic [3:0]        coils;
  
  rf_slot_receiver #(.N_SLOTS(N_SLOTS)) u_rf (
    .clk, .rst(reset), .vt(rf_vt), .rf_d(w2),
    .rpt_valid, .rpt_slot, .rpt_status, .rpt_error
  );

  slot_status #(.N_SLOTS(N_SLOTS)) u_status (
    .clk, .rst(reset), .rpt_valid, .rpt_slot, .rpt_status,
    .alloc_we, .alloc_slot(slot),
    .led_filled, .led_reserv, .slot_empty, .space_available
  );

  parking_controller u_ctrl (
    .clk, .rst(reset), .car_enter(w3), .space_available,
    .door_done, .ident_done, .new_member, .person, .temp_card,
    .slot_done, .slot_found, .slot,
    .door_start, .ident_start, .slot_start, .log_push, .log_rec, .refused, .admitted
  );

  interfacing #(.DIV(DIV), .DOOR_STEPS(DOOR_STEPS), .T_POWERUP(T_POWERUP),
                .T_E_HIGH(T_E_HIGH), .T_CMD(T_CMD), .T_CLEAR(T_CLEAR)) u_io (
    .clk, .rst(reset), .door_start, .space_available,
    .d(lcd_d), .z(coils), .e(lcd_e), .rs(lcd_rs), .rw(lcd_rw),
    .clkd, .door_busy(), .door_done, .lcd_ready
  );

  identification #(.MEMBER_MASK(MEMBER_MASK)) u_ident (
    .clk, .rst(reset), .start(ident_start), .card(w4), .busy(), .done(ident_done),
    .identified, .new_member, .person, .temp_card
  );

  slot_checker #(.N_SLOTS(N_SLOTS)) u_slot (
    .clk, .rst(reset), .start(slot_start), .slot_empty, .busy(), .done(slot_done),
    .found(slot_found), .slot, .led_slotallot(led), .alloc_we
  );

  data_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst(reset), .wr_en(log_push), .wr_data(log_rec), .rd_en(host_rd),
    .rd_data(host_rec), .empty(host_empty), .full(), .count(),
    .overflow(host_overflow)
  );

  assign z = {3'b000, coils};

endmodule

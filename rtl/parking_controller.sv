// parking_controller -- the entrance sequence of the parking system.
//
// One state machine walks each arriving car through the steps of the system's flow
// chart: entrance, space check, door opening, identification, slot check, slot
// allotment, exit.
//
//   P_IDLE        wait for a car at the entrance (rising edge of car_enter, the w3
//                 sensor input, after a two-flip-flop synchroniser)
//   P_SPACE_CHECK space_available = 0: the LCD is showing "NO SPACE EXIT"; the car is
//                 refused (`refused` pulses) and the machine waits for it to leave.
//                 Otherwise pulse door_start.
//   P_DOOR_OPEN   wait for the stepper to finish turning clockwise (door_done), then
//                 pulse ident_start
//   P_IDENTIFY    wait for ident_done, then pulse slot_start
//   P_SLOT_CHECK  wait for slot_done (the checker has allotted a slot, or found none
//                 if the last one was taken during the sequence)
//   P_LOG         push the visit record into the host's data buffer; `admitted` pulses
//   P_WAIT_LEAVE  wait until car_enter falls, then back to P_IDLE
//
// Interface: clk, rst (synchronous, active high); car_enter (asynchronous); status and
// done inputs from the blocks it starts; one-cycle start pulses, the record to log and
// the refused / admitted event pulses out.
// Timing: each start pulse is set by the clock edge that samples the previous step's
// done.  Counting from the first edge that samples car_enter high, the machine enters
// P_SPACE_CHECK on the third edge and decides on the fourth.
//
// The order of the steps and the no-space exit follow the published flow chart.  The
// edge-triggered entrance sensor, waiting for the car to leave before the next one and
// logging every visit are this design's choices.
module parking_controller
  import parking_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              car_enter,
  input  logic              space_available,
  input  logic              door_done,
  input  logic              ident_done,
  input  logic              new_member,
  input  logic [CARD_W-1:0] person,
  input  logic [TEMP_W-1:0] temp_card,
  input  logic              slot_done,
  input  logic              slot_found,
  input  logic [SLOT_W-1:0] slot,
  output logic              door_start,
  output logic              ident_start,
  output logic              slot_start,
  output logic              log_push,
  output visit_rec_t        log_rec,
  output logic              refused,
  output logic              admitted
);

  typedef enum logic [2:0] {
    P_IDLE, P_SPACE_CHECK, P_DOOR_OPEN, P_IDENTIFY, P_SLOT_CHECK, P_LOG, P_WAIT_LEAVE
  } park_state_e;

  park_state_e state;
  logic [2:0]  car_sync;     // synchroniser, then edge history
  logic        car_present, car_rise;

  assign car_present = car_sync[1];
  assign car_rise    = car_sync[1] & ~car_sync[2];

  always_ff @(posedge clk) begin
    if (rst) car_sync <= '0;
    else     car_sync <= {car_sync[1:0], car_enter};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= P_IDLE;
      door_start  <= 1'b0;
      ident_start <= 1'b0;
      slot_start  <= 1'b0;
      log_push    <= 1'b0;
      log_rec     <= '0;
      refused     <= 1'b0;
      admitted    <= 1'b0;
    end else begin
      door_start  <= 1'b0;
      ident_start <= 1'b0;
      slot_start  <= 1'b0;
      log_push    <= 1'b0;
      refused     <= 1'b0;
      admitted    <= 1'b0;
      case (state)
        P_IDLE:
          if (car_rise) state <= P_SPACE_CHECK;
        P_SPACE_CHECK:
          if (space_available) begin
            door_start <= 1'b1;
            state      <= P_DOOR_OPEN;
          end else begin
            refused <= 1'b1;
            state   <= P_WAIT_LEAVE;
          end
        P_DOOR_OPEN:
          if (door_done) begin
            ident_start <= 1'b1;
            state       <= P_IDENTIFY;
          end
        P_IDENTIFY:
          if (ident_done) begin
            slot_start <= 1'b1;
            state      <= P_SLOT_CHECK;
          end
        P_SLOT_CHECK:
          if (slot_done) state <= P_LOG;
        P_LOG: begin
          log_push          <= 1'b1;
          admitted          <= 1'b1;
          log_rec.new_member <= new_member;
          log_rec.card      <= person;
          log_rec.temp_card <= temp_card;
          log_rec.found     <= slot_found;
          log_rec.slot      <= slot;
          state             <= P_WAIT_LEAVE;
        end
        default:                 // P_WAIT_LEAVE
          if (!car_present) state <= P_IDLE;
      endcase
    end
  end

  // Only one step is started at a time.
  a_one_start: assert property (@(posedge clk) disable iff (rst)
                                $onehot0({door_start, ident_start, slot_start}))
    else $error("parking_controller: two steps started together");

endmodule

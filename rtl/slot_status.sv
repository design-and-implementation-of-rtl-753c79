// slot_status -- the status register of every parking slot.
//
// Holds one slot_state_e (empty, filled, reserved) per slot.  Two write ports update
// it on the clock edge: an RF report (rpt_valid, rpt_slot, rpt_status) sets a slot to
// the reported status, and an allotment (alloc_we, alloc_slot) marks the slot just given
// to a car as filled so that the next car is not sent to it before its sensor reports.
// When both name the same slot in one cycle the RF report wins, since it comes from the
// sensor.  After reset every slot is empty until the sensors report.
//
// Outputs, all combinational from the registers: one bit per slot for the filled and
// reserved LEDs (led_filled, led_reserv), the empty vector the slot checker searches,
// and space_available, high while at least one slot is empty.
//
// The three states and the filled/reserved LED outputs follow the published design; the
// reset value, the write priority and marking an allotted slot filled are this design's.
module slot_status
  import parking_pkg::*;
#(
  parameter int unsigned N_SLOTS = N_SLOTS_DEF
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               rpt_valid,
  input  logic [SLOT_W-1:0]  rpt_slot,
  input  slot_state_e        rpt_status,
  input  logic               alloc_we,
  input  logic [SLOT_W-1:0]  alloc_slot,
  output logic [N_SLOTS-1:0] led_filled,
  output logic [N_SLOTS-1:0] led_reserv,
  output logic [N_SLOTS-1:0] slot_empty,
  output logic               space_available
);

  slot_state_e status [N_SLOTS];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N_SLOTS; i++) begin
      if (rst)
        status[i] <= SLOT_EMPTY;
      else if (rpt_valid && int'(rpt_slot) == i)
        status[i] <= rpt_status;
      else if (alloc_we && int'(alloc_slot) == i)
        status[i] <= SLOT_FILLED;
    end
  end

  always_comb begin
    for (int i = 0; i < N_SLOTS; i++) begin
      led_filled[i] = (status[i] == SLOT_FILLED);
      led_reserv[i] = (status[i] == SLOT_RESERVED);
      slot_empty[i] = (status[i] == SLOT_EMPTY);
    end
  end

  assign space_available = |slot_empty;

endmodule

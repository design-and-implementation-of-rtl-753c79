// interfacing -- the door stepper and the entrance LCD side by side.
//
// Groups the two output interfaces of the parking system, as its published RTL view
// does: the stepper sequencer that turns the door motor through the ULN2003 driver and
// the character-LCD controller.  Pins: d[7:0], e, rs, rw to the LCD, z[3:0] to the
// ULN2003.  door_start opens the door (see stepper_motor); space_available picks the
// LCD message (see lcd_controller).  door_busy, door_done, clkd and lcd_ready report
// progress.  Timing is that of the two blocks.
//
// The port names clk, rst, d, z, e, rs, rw follow the published block; the door_start
// and space_available inputs and the status outputs are added so that the controller
// can drive it.
module interfacing #(
  parameter int unsigned DIV        = 250_000,
  parameter int unsigned DOOR_STEPS = 50,
  parameter int unsigned T_POWERUP  = 1_500_000,
  parameter int unsigned T_E_HIGH   = 25,
  parameter int unsigned T_CMD      = 5_000,
  parameter int unsigned T_CLEAR    = 200_000
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       door_start,
  input  logic       space_available,
  output logic [7:0] d,
  output logic [3:0] z,
  output logic       e,
  output logic       rs,
  output logic       rw,
  output logic       clkd,
  output logic       door_busy,
  output logic       door_done,
  output logic       lcd_ready
);

  stepper_motor #(.DIV(DIV), .DOOR_STEPS(DOOR_STEPS)) u_stepper (
    .clk, .rst, .start(door_start), .z, .clkd, .busy(door_busy), .done(door_done)
  );

  lcd_controller #(.T_POWERUP(T_POWERUP), .T_E_HIGH(T_E_HIGH), .T_CMD(T_CMD),
                   .T_CLEAR(T_CLEAR)) u_lcd (
    .clk, .rst, .space_available, .d, .e, .rs, .rw, .ready(lcd_ready)
  );

endmodule

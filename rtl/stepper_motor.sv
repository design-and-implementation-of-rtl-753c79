// stepper_motor -- entrance-door stepper sequencer with its clock divider.
//
// A free-running counter `cnt` divides the system clock: every DIV cycles it wraps,
// producing a one-cycle step tick, and the square wave `clkd` toggles (period 2*DIV
// cycles).  A `start` pulse while idle opens the door: on each of the next DOOR_STEPS
// ticks the coil pattern on `z` advances one full step, single-coil (wave) drive,
// 0001 -> 0010 -> 0100 -> 1000 -> 0001 ..., which this design calls clockwise.  On the
// tick after the last step the coils are released (z = 0000), `busy` falls and `done`
// pulses for one cycle.  The phase index is kept between openings, as the rotor position
// is.  While idle z is 0000, as in the simulation the design was shown with.
//
// Interface: clk, rst (synchronous, active high), start in; z[3:0] to the ULN2003
// driver, clkd, busy, done out.
// Timing: the first step comes on the first tick after start (1..DIV cycles later);
// steps are then exactly DIV cycles apart; done comes DIV cycles after the last step.
//
// The counter/divided-clock structure (cnt, clkd), the 4-wire coil output and clockwise
// rotation for door opening follow the published design.  The divide ratio, the number
// of steps, wave drive and the coil order are this design's choices; the logic is
// clocked by clk and uses the tick as an enable rather than clocking on clkd.
module stepper_motor #(
  parameter int unsigned DIV        = 250_000,  // clk cycles per step (400 steps/s at 100 MHz)
  parameter int unsigned DOOR_STEPS = 50        // steps per opening (90 deg on a 200-step motor)
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       start,
  output logic [3:0] z,
  output logic       clkd,
  output logic       busy,
  output logic       done
);

  localparam int unsigned CNT_W  = (DIV > 1) ? $clog2(DIV) : 1;
  localparam int unsigned STEP_W = $clog2(DOOR_STEPS + 1);

  logic [CNT_W-1:0]  cnt;
  logic              tick;
  logic [STEP_W-1:0] steps_left;
  logic [1:0]        phase;

  assign tick = (cnt == CNT_W'(DIV - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt  <= '0;
      clkd <= 1'b0;
    end else if (tick) begin
      cnt  <= '0;
      clkd <= ~clkd;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      z          <= 4'b0000;
      phase      <= 2'd3;
      steps_left <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy       <= 1'b1;
          steps_left <= STEP_W'(DOOR_STEPS);
        end
      end else if (tick) begin
        if (steps_left == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
          z    <= 4'b0000;
        end else begin
          phase      <= phase + 1'b1;
          z          <= 4'b0001 << (phase + 2'd1);
          steps_left <= steps_left - 1'b1;
        end
      end
    end
  end

endmodule

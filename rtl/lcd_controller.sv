// lcd_controller -- shows the lot's space status on a 16x2 character LCD.
//
// The LCD is an HD44780-compatible module on an 8-bit bus: data lines d[7:0] (DB7..DB0),
// register select rs (0 command, 1 character), read/write rw and enable e.  The
// controller only writes, so rw is held at 0 and the LCD's busy flag is never read;
// each transfer is instead followed by a fixed wait long enough for the LCD to finish.
//
// Every transfer is one pass of a small sequencer: d and rs are set up with e low for
// one cycle, e is high for T_E_HIGH cycles, then e is low again while d and rs are held
// for the wait (T_CMD cycles, or T_CLEAR after the clear command and the first two
// function-set commands).  After reset the controller waits T_POWERUP cycles and sends
// the initialisation commands 38h, 38h, 38h (8-bit bus, 2 lines, 5x8 font), 0Ch
// (display on, no cursor), 01h (clear), 06h (increment, no shift).  It then writes line
// 1: command 80h (address 0) and 16 characters, "SPACE AVAILABLE " when
// space_available is 1, otherwise "NO SPACE EXIT   ".  Whenever space_available differs
// from the message on display (checked after each complete message) line 1 is
// rewritten.  `ready` is 1 while the displayed message matches space_available.
//
// Timing (defaults, 100 MHz clock): power-up wait 15 ms, e pulse 250 ns, 50 us after a
// command or character and 2 ms after a clear.  A complete message takes 17 transfers.
//
// The pins (DB0-DB7, RS, R/W, E) and the two messages follow the published design; the
// write-only timed protocol, the command sequence, the upper-case text and all delays
// are this design's choices, taken from the usual HD44780 data-sheet procedure.
module lcd_controller #(
  parameter int unsigned T_POWERUP = 1_500_000,
  parameter int unsigned T_E_HIGH  = 25,
  parameter int unsigned T_CMD     = 5_000,
  parameter int unsigned T_CLEAR   = 200_000
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       space_available,
  output logic [7:0] d,
  output logic       e,
  output logic       rs,
  output logic       rw,
  output logic       ready
);

  localparam logic [8*16-1:0] MSG_AVAIL   = "SPACE AVAILABLE ";
  localparam logic [8*16-1:0] MSG_NOSPACE = "NO SPACE EXIT   ";

  localparam int unsigned N_INIT  = 6;             // steps 0..5: initialisation
  localparam int unsigned STEP_MSG = N_INIT;       // step 6: set address, 7..22: text
  localparam int unsigned N_STEPS = N_INIT + 1 + 16;

  localparam int unsigned TMAX = (T_POWERUP > T_CLEAR) ? T_POWERUP : T_CLEAR;
  localparam int unsigned TW   = $clog2(TMAX + 1);

  typedef enum logic [2:0] {S_POWERUP, S_SETUP, S_PULSE, S_WAIT, S_IDLE} lcd_state_e;

  lcd_state_e   state;
  logic [4:0]   step;
  logic [TW-1:0] timer;
  logic         shown;      // message selected for the current / last write
  logic         step_rs;
  logic [7:0]   step_data;
  logic         step_long;

  // Transfer table: what each step sends.
  always_comb begin
    step_rs   = 1'b0;
    step_data = 8'h00;
    step_long = 1'b0;
    case (step)
      5'd0: begin step_data = 8'h38; step_long = 1'b1; end
      5'd1: begin step_data = 8'h38; step_long = 1'b1; end
      5'd2:       step_data = 8'h38;
      5'd3:       step_data = 8'h0C;
      5'd4: begin step_data = 8'h01; step_long = 1'b1; end
      5'd5:       step_data = 8'h06;
      5'd6:       step_data = 8'h80;
      default: begin
        step_rs   = 1'b1;
        step_data = shown ? MSG_AVAIL[8*(15 - (int'(step) - 7)) +: 8]
                          : MSG_NOSPACE[8*(15 - (int'(step) - 7)) +: 8];
      end
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_POWERUP;
      step  <= '0;
      timer <= TW'(T_POWERUP);
      shown <= 1'b0;
      d     <= 8'h00;
      e     <= 1'b0;
      rs    <= 1'b0;
    end else begin
      case (state)
        S_POWERUP: begin
          if (timer == '0) begin
            state <= S_SETUP;
            step  <= '0;
            shown <= space_available;
          end else begin
            timer <= timer - 1'b1;
          end
        end
        S_SETUP: begin           // one cycle of address setup, e low
          d     <= step_data;
          rs    <= step_rs;
          e     <= 1'b0;
          timer <= TW'(T_E_HIGH - 1);
          state <= S_PULSE;
        end
        S_PULSE: begin
          e <= 1'b1;
          if (timer == '0) begin
            state <= S_WAIT;
            timer <= step_long ? TW'(T_CLEAR) : TW'(T_CMD);
          end else begin
            timer <= timer - 1'b1;
          end
        end
        S_WAIT: begin
          e <= 1'b0;
          if (timer == '0) begin
            if (int'(step) == N_STEPS - 1) begin
              state <= S_IDLE;
            end else begin
              step  <= step + 1'b1;
              state <= S_SETUP;
            end
          end else begin
            timer <= timer - 1'b1;
          end
        end
        default: begin           // S_IDLE: rewrite line 1 when the status changes
          if (space_available != shown) begin
            shown <= space_available;
            step  <= 5'(STEP_MSG);
            state <= S_SETUP;
          end
        end
      endcase
    end
  end

  assign rw    = 1'b0;
  assign ready = (state == S_IDLE) && (shown == space_available);

endmodule

// identification -- identifies the visitor after the door has opened.
//
// A `start` pulse moves the machine from idle to identify; there it reads the code of
// the visitor's card, `card`.  Registered member codes are the bits set in MEMBER_MASK
// (bit c set: code c belongs to a member).  A member is reported as `identified` with
// the code in `person`.  Any other code (by default code 0, which stands for "no card")
// is a new member: `new_member` is set and the next temporary-card number, counting
// 0, 1, 2, ... and wrapping after 2**TEMP_W cards, is issued on `temp_card`.  Then
// `done` pulses and the machine returns to idle; the results stay until the next start.
//
// Interface: clk, rst (synchronous, active high), start, card[CARD_W-1:0] in; busy,
// done, identified, new_member, person, temp_card out.
// Timing: card is sampled one cycle after the start pulse; done and the results appear
// two cycles after the start pulse.
//
// The idle/identify states, the identified / new-member outcomes, the person output and
// the temporary card for a new member follow the published design.  The flow chart also
// shows an exit when identification fails, but the text gives every new member a
// temporary card; this design follows the text, so every visitor is admitted.  The card
// code width, the member table as a parameter and the numbering of temporary cards are
// this design's own.
module identification
  import parking_pkg::*;
#(
  parameter logic [2**CARD_W-1:0] MEMBER_MASK = 4'b1110
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic [CARD_W-1:0] card,
  output logic              busy,
  output logic              done,
  output logic              identified,
  output logic              new_member,
  output logic [CARD_W-1:0] person,
  output logic [TEMP_W-1:0] temp_card
);

  typedef enum logic {ID_IDLE, ID_IDENTIFY} id_state_e;

  id_state_e         current_state;
  logic [TEMP_W-1:0] next_temp;

  assign busy = (current_state == ID_IDENTIFY);

  always_ff @(posedge clk) begin
    if (rst) begin
      current_state <= ID_IDLE;
      done          <= 1'b0;
      identified    <= 1'b0;
      new_member    <= 1'b0;
      person        <= '0;
      temp_card     <= '0;
      next_temp     <= '0;
    end else begin
      done <= 1'b0;
      case (current_state)
        ID_IDLE: begin
          if (start) current_state <= ID_IDENTIFY;
        end
        default: begin           // ID_IDENTIFY
          current_state <= ID_IDLE;
          done          <= 1'b1;
          person        <= card;
          if (MEMBER_MASK[card]) begin
            identified <= 1'b1;
            new_member <= 1'b0;
          end else begin
            identified <= 1'b0;
            new_member <= 1'b1;
            temp_card  <= next_temp;
            next_temp  <= next_temp + 1'b1;
          end
        end
      endcase
    end
  end

endmodule

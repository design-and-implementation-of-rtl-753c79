// slot_checker -- finds the slot for an admitted car by checking slots in order.
//
// Following the slot-check chain of the system's flow chart (slot 1 free? slot 2 free?
// ... slot n free?), a `start` pulse makes the checker look at one slot per clock cycle,
// beginning with slot index 0, and stop at the first empty one.  It then allots that
// slot: `found` = 1, `slot` holds its index, `led_slotallot` lights its bit alone, and
// `alloc_we` pulses so the status register marks it filled.  If no slot is empty after
// the last one, `found` = 0 and `led_slotallot` is all zero.  `done` pulses once in
// either case; the results stay until the next start.  A start while busy is ignored.
//
// Interface: clk, rst (synchronous, active high), start, slot_empty[N_SLOTS-1:0] in;
// busy, done, found, slot, led_slotallot[N_SLOTS-1:0], alloc_we out.
// Timing: with the first empty slot at index k, done comes k+2 cycles after the start
// pulse (start registered, then k+1 check cycles); N_SLOTS+1 cycles when none is empty.
// slot_empty is sampled as the walk reaches each slot.
//
// Slots are numbered 1..n in the flow chart; here index k is slot k+1.  The ordered walk
// and the one-hot allot LEDs follow the published design; the cycle timing is this
// design's.
module slot_checker
  import parking_pkg::*;
#(
  parameter int unsigned N_SLOTS = N_SLOTS_DEF
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  input  logic [N_SLOTS-1:0] slot_empty,
  output logic               busy,
  output logic               done,
  output logic               found,
  output logic [SLOT_W-1:0]  slot,
  output logic [N_SLOTS-1:0] led_slotallot,
  output logic               alloc_we
);

  typedef enum logic {C_IDLE, C_CHECK} chk_state_e;

  chk_state_e        state;
  logic [SLOT_W-1:0] idx;

  assign busy = (state != C_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state         <= C_IDLE;
      idx           <= '0;
      done          <= 1'b0;
      found         <= 1'b0;
      slot          <= '0;
      led_slotallot <= '0;
      alloc_we      <= 1'b0;
    end else begin
      done     <= 1'b0;
      alloc_we <= 1'b0;
      case (state)
        C_IDLE: begin
          if (start) begin
            state         <= C_CHECK;
            idx           <= '0;
            found         <= 1'b0;
            led_slotallot <= '0;
          end
        end
        default: begin           // C_CHECK
          if (slot_empty[idx]) begin
            state    <= C_IDLE;
            done     <= 1'b1;
            found    <= 1'b1;
            slot     <= idx;
            alloc_we <= 1'b1;
            led_slotallot <= N_SLOTS'(1) << idx;
          end else if (int'(idx) == N_SLOTS - 1) begin
            state <= C_IDLE;
            done  <= 1'b1;
          end else begin
            idx <= idx + 1'b1;
          end
        end
      endcase
    end
  end

endmodule

// rf_slot_receiver -- turns HT12D decoder words into slot status reports.
//
// Each parking slot has an IR sensor pair; the sensor side encodes slot status with an
// HT12E encoder and sends it over an RF link to an HT12D decoder, whose four parallel
// data outputs D3..D0 and valid-transmission output VT reach the FPGA.  This block
// brings both into the clock domain with two flip-flops each, takes one 4-bit word on
// every rising edge of VT, and assembles a report from two consecutive words:
//
//   word 1:  {1, status[1:0], slot[4]}     (bit 3 = 1 marks the first word)
//   word 2:  {slot[3:0]}
//
// A word with bit 3 = 0 while a first word is expected is dropped, so the receiver
// regains frame alignment at the next first word.  When word 2 arrives the report is
// checked: a slot index of N_SLOTS or more, or status 2'b11, is dropped and counted
// as an error pulse; otherwise rpt_valid pulses for one cycle with rpt_slot and
// rpt_status.
//
// Interface: clk, rst (synchronous, active high); vt, rf_d[3:0] from the HT12D (async);
// rpt_valid, rpt_slot, rpt_status, rpt_error out.
// Timing: rpt_valid (or rpt_error) is set by the second clock edge after the edge that
// first samples VT high for word 2 (one more synchroniser stage, then the report
// register), and lasts one cycle.
//
// The HT12D with its 4 data pins as the path for slot status follows the published
// design.  The two-word framing, the status code and the use of VT are this design's
// own, since the published design does not say how 32 slots are reported over 4 wires.
module rf_slot_receiver
  import parking_pkg::*;
#(
  parameter int unsigned N_SLOTS = N_SLOTS_DEF
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              vt,
  input  logic [3:0]        rf_d,
  output logic              rpt_valid,
  output logic [SLOT_W-1:0] rpt_slot,
  output slot_state_e       rpt_status,
  output logic              rpt_error
);

  logic [2:0] vt_sync;                // two synchroniser stages plus edge history
  logic [3:0] d_sync1, d_sync2;
  logic       second;                 // 1: waiting for word 2
  logic [1:0] st_hold;
  logic       slot_hi;

  always_ff @(posedge clk) begin
    if (rst) begin
      vt_sync <= '0;
      d_sync1 <= '0;
      d_sync2 <= '0;
    end else begin
      vt_sync <= {vt_sync[1:0], vt};
      d_sync1 <= rf_d;
      d_sync2 <= d_sync1;
    end
  end

  wire word_strobe = vt_sync[1] & ~vt_sync[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      second     <= 1'b0;
      st_hold    <= '0;
      slot_hi    <= 1'b0;
      rpt_valid  <= 1'b0;
      rpt_error  <= 1'b0;
      rpt_slot   <= '0;
      rpt_status <= SLOT_EMPTY;
    end else begin
      rpt_valid <= 1'b0;
      rpt_error <= 1'b0;
      if (word_strobe) begin
        if (!second) begin
          if (d_sync2[3]) begin
            second  <= 1'b1;
            st_hold <= d_sync2[2:1];
            slot_hi <= d_sync2[0];
          end
        end else begin
          second <= 1'b0;
          if (st_hold == 2'b11 || int'({slot_hi, d_sync2}) >= N_SLOTS) begin
            rpt_error <= 1'b1;
          end else begin
            rpt_valid  <= 1'b1;
            rpt_slot   <= SLOT_W'({slot_hi, d_sync2});
            rpt_status <= slot_state_e'(st_hold);
          end
        end
      end
    end
  end

endmodule

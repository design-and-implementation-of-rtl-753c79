// tb_parking_controller -- self-checking test of the entrance sequence.
//
// The blocks the controller starts are played by simple responders that answer each
// start pulse with a done pulse after a random delay and with random results.  For a
// series of cars (car_enter raised, held, dropped at random times, with space
// available or not) the testbench checks that:
//   - with no space the car is refused and nothing is started;
//   - otherwise door, identification and slot check are started once each, in that
//     order, each one cycle after the previous done;
//   - exactly one record is logged per admitted car, carrying the identification and
//     slot results that were presented;
//   - nothing new starts until the car has left (car_enter low).
`timescale 1ns/1ps
module tb_parking_controller;
  import parking_pkg::*;
  logic clk = 0, rst = 1;
  logic car_enter = 0, space_available = 1;
  logic door_done = 0, ident_done = 0, slot_done = 0;
  logic new_member = 0, slot_found = 0;
  logic [CARD_W-1:0] person = 0;
  logic [TEMP_W-1:0] temp_card = 0;
  logic [SLOT_W-1:0] slot = 0;
  logic door_start, ident_start, slot_start, log_push, refused, admitted;
  visit_rec_t log_rec;
  int checks = 0, failures = 0;

  parking_controller dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Responders drive done with a non-blocking assignment at cycle c; the controller
  // sees it on the next edge and its start pulse is seen here one edge later (c + 2).
  // event log: 1 door, 2 ident, 3 slot, 4 log, 5 refused
  int ev [$];
  int last_done_cyc = -10, cyc = 0;
  int d_delay = -1, i_delay = -1, s_delay = -1;
  visit_rec_t exp_rec;

  always @(posedge clk) if (!rst) begin
    cyc++;
    door_done <= 0; ident_done <= 0; slot_done <= 0;
    if (door_start)  begin ev.push_back(1); d_delay = $urandom_range(1, 20); end
    if (ident_start) begin ev.push_back(2); i_delay = $urandom_range(1, 6);
                           check(cyc == last_done_cyc + 2, "ident start one cycle after door done"); end
    if (slot_start)  begin ev.push_back(3); s_delay = $urandom_range(1, 33);
                           check(cyc == last_done_cyc + 2, "slot start one cycle after ident done"); end
    if (log_push) begin
      ev.push_back(4);
      check(log_rec == exp_rec, "logged record");
      check(admitted, "admitted with log");
    end
    if (refused) ev.push_back(5);
    if (d_delay == 0) begin door_done <= 1; last_done_cyc = cyc; end
    if (i_delay == 0) begin
      ident_done <= 1; last_done_cyc = cyc;
      new_member <= exp_rec.new_member; person <= exp_rec.card; temp_card <= exp_rec.temp_card;
    end
    if (s_delay == 0) begin
      slot_done <= 1; last_done_cyc = cyc;
      slot_found <= exp_rec.found; slot <= exp_rec.slot;
    end
    if (d_delay >= 0) d_delay--;
    if (i_delay >= 0) i_delay--;
    if (s_delay >= 0) s_delay--;
  end

  int n_ref = 0, n_adm = 0;
  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 60; n++) begin
      bit sp;
      sp = (n % 3) != 1;
      exp_rec = visit_rec_t'($urandom);
      space_available <= sp;
      ev.delete();
      car_enter <= 1;
      repeat (90) @(posedge clk);
      if (sp) begin
        check(ev.size() == 4 && ev[0] == 1 && ev[1] == 2 && ev[2] == 3 && ev[3] == 4,
              $sformatf("admit sequence (%0d events)", ev.size()));
        n_adm++;
      end else begin
        check(ev.size() == 1 && ev[0] == 5, "refused, nothing started");
        n_ref++;
      end
      // car still there: nothing more may happen
      ev.delete();
      repeat (10) @(posedge clk);
      check(ev.size() == 0, "no restart while car present");
      car_enter <= 0;
      repeat ($urandom_range(4, 10)) @(posedge clk);
    end
    check(n_ref > 0 && n_adm > 0, "both paths");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_parking_system -- end-to-end test of the parking system.
//
// A lot of 8 slots with short timings (step every 4 cycles, 4 steps per opening, short
// LCD delays) and a 4-record host queue.  The testbench plays the outside world: it
// sends slot status over the RF link (HT12D words and VT strobes on w2 / rf_vt), brings
// cars to the entrance (w3) with card codes (w4), watches the door coils (z), reads the
// LCD bus and reads visit records from the host port.  A model of the slot table,
// updated from the reports it sends and from the allotments it expects, gives the
// expected slot for each car (the first empty one) and the expected LCD message.
//
// Scenario: reserved and filled slots are reported, plus two malformed reports; a
// member and a new member are admitted and sent past reserved and filled slots; the lot
// fills and the LCD switches to "NO SPACE EXIT"; a car is refused; a slot frees and
// the LCD switches back; a car is admitted but its last slot is taken over RF while the
// door opens, so the slot check finds none; four records are left unread and a fifth
// visitor overflows the host queue.  Every mechanism is counted and must occur.
`timescale 1ns/1ps
module tb_parking_system;
  import parking_pkg::*;
  localparam int NS = 8, DIV = 4, STEPS = 4, DEPTH = 4;

  logic clk = 0, reset = 1;
  logic [3:0] w2 = 0;
  logic rf_vt = 0, w3 = 0, host_rd = 0;
  logic [CARD_W-1:0] w4 = 0;
  logic [NS-1:0] led, led_filled, led_reserv;
  logic [6:0] z;
  logic identified, new_member, lcd_e, lcd_rs, lcd_rw, host_empty, host_overflow;
  logic refused, admitted, rpt_error, clkd, lcd_ready;
  logic [TEMP_W-1:0] temp_card;
  logic [7:0] lcd_d;
  visit_rec_t host_rec;
  int checks = 0, failures = 0;

  parking_system #(.N_SLOTS(NS), .DIV(DIV), .DOOR_STEPS(STEPS), .T_POWERUP(30),
                   .T_E_HIGH(2), .T_CMD(5), .T_CLEAR(12), .BUF_DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- monitors ----------------
  string lcd_line = "", lcd_buf = "";
  int lcd_msgs = 0, coil_steps = 0, n_rpt_err = 0, n_refused = 0, n_admitted = 0;
  logic prev_e = 0;
  logic [6:0] prev_z = 0;
  always @(posedge clk) if (!reset) begin
    if (prev_e && !lcd_e) begin
      if (!lcd_rs && lcd_d == 8'h80) lcd_buf = "";
      else if (lcd_rs) begin
        lcd_buf = {lcd_buf, string'(lcd_d)};
        if (lcd_buf.len() == 16) begin lcd_line = lcd_buf; lcd_msgs++; end
      end
    end
    prev_e = lcd_e;
    if (z != prev_z && z != 0) coil_steps++;
    prev_z = z;
    check(z[6:4] == 0 && lcd_rw == 0, "spare driver bits and rw low");
    if (!reset) begin
      if (rpt_error) n_rpt_err++;
      if (refused) n_refused++;
      if (admitted) n_admitted++;
    end
  end

  // ---------------- model ----------------
  int model [NS];      // 0 empty, 1 filled, 2 reserved
  int next_temp = 0;
  visit_rec_t exp_q [$];
  int m_lcd_switch = 0, m_reserved_skip = 0, m_filled_skip = 0, m_no_slot = 0,
      m_member = 0, m_new = 0, m_overflow = 0, m_records = 0;

  function automatic int first_empty();
    for (int i = 0; i < NS; i++) if (model[i] == 0) return i;
    return -1;
  endfunction

  task automatic compare_leds();
    logic [NS-1:0] f = 0, r = 0;
    for (int i = 0; i < NS; i++) begin f[i] = model[i] == 1; r[i] = model[i] == 2; end
    check(led_filled == f, $sformatf("led_filled %b exp %b", led_filled, f));
    check(led_reserv == r, $sformatf("led_reserv %b exp %b", led_reserv, r));
  endtask

  task automatic send_word(logic [3:0] w);
    w2 <= w;
    repeat (2) @(posedge clk);
    rf_vt <= 1;
    repeat (3) @(posedge clk);
    rf_vt <= 0;
    repeat (3) @(posedge clk);
  endtask

  task automatic report(int slot, int st, bit update_model = 1);
    send_word({1'b1, 2'(st), 1'(slot >> 4)});
    send_word(4'(slot));
    repeat (4) @(posedge clk);
    if (update_model && st != 3 && slot < NS) model[slot] = st;
  endtask

  task automatic wait_lcd(string exp);
    int n = 0;
    while (!(lcd_ready && lcd_line == exp) && n < 2000) begin @(posedge clk); n++; end
    check(lcd_line == exp, $sformatf("LCD shows '%s', expected '%s'", lcd_line, exp));
  endtask

  // A car with card `card` arrives.  race_slot >= 0: that slot is reported filled over
  // RF while the door opens.
  task automatic visit(logic [CARD_W-1:0] card, int race_slot = -1);
    int steps0 = coil_steps, adm0 = n_admitted, ref0 = n_refused, n = 0, exp_slot;
    bit space = first_empty() >= 0;
    w4 <= card;
    w3 <= 1;
    if (race_slot >= 0) begin
      repeat (8) @(posedge clk);
      check(dut.u_io.door_busy, "door opening during race report");
      report(race_slot, 1);
    end
    while (n_admitted == adm0 && n_refused == ref0 && n < 3000) begin @(posedge clk); n++; end
    if (!space) begin
      check(n_refused == ref0 + 1 && n_admitted == adm0, "car refused");
      check(coil_steps == steps0, "door stays shut when refused");
    end else begin
      visit_rec_t r;
      bit member = card != 0;
      exp_slot = first_empty();
      check(n_admitted == adm0 + 1, "car admitted");
      check(coil_steps - steps0 == STEPS, $sformatf("door turned %0d steps", coil_steps - steps0));
      check(identified == member && new_member == !member, "identification result");
      r.new_member = !member;
      r.card = card;
      r.temp_card = member ? temp_card : TEMP_W'(next_temp);
      if (!member) begin
        check(int'(temp_card) == next_temp, "temporary card number");
        next_temp++;
        m_new++;
      end else m_member++;
      r.found = exp_slot >= 0;
      r.slot = exp_slot >= 0 ? SLOT_W'(exp_slot) : '0;
      if (exp_slot >= 0) begin
        check(led == (NS'(1) << exp_slot), $sformatf("allot LED %b, slot %0d", led, exp_slot));
        for (int i = 0; i < exp_slot; i++) begin
          if (model[i] == 2) m_reserved_skip++;
          if (model[i] == 1) m_filled_skip++;
        end
        model[exp_slot] = 1;
      end else begin
        check(led == 0, "no allot LED when no slot is free");
        r.slot = dut.u_slot.slot;          // slot index is not meaningful without found
        m_no_slot++;
      end
      exp_q.push_back(r);
    end
    repeat (3) @(posedge clk);
    compare_leds();
    w3 <= 0;
    repeat (6) @(posedge clk);
  endtask

  task automatic read_records(int expect_n);
    int n = 0;
    while (!host_empty) begin
      visit_rec_t x;
      x = exp_q.pop_front();
      check(host_rec.new_member == x.new_member && host_rec.card == x.card &&
            host_rec.found == x.found && (!x.found || host_rec.slot == x.slot) &&
            (!x.new_member || host_rec.temp_card == x.temp_card),
            $sformatf("host record %p exp %p", host_rec, x));
      host_rd <= 1; @(posedge clk); host_rd <= 0; @(posedge clk);
      n++; m_records++;
    end
    check(n == expect_n, $sformatf("%0d records read, expected %0d", n, expect_n));
  endtask

  initial begin
    foreach (model[i]) model[i] = 0;
    repeat (3) @(posedge clk);
    reset <= 0;
    wait_lcd("SPACE AVAILABLE ");
    // slot table from the sensors
    report(0, 2); report(1, 1); report(3, 2);
    report(5, 3);                 // malformed: status 11
    report(12, 1);                // malformed: slot beyond the lot
    compare_leds();
    check(n_rpt_err == 2, "two malformed reports rejected");
    visit(2'b01);                 // member -> slot 2
    visit(2'b00);                 // new member -> slot 4
    read_records(2);
    report(5, 1); report(6, 1);
    visit(2'b10);                 // member -> slot 7, lot now full
    read_records(1);
    wait_lcd("NO SPACE EXIT   ");
    m_lcd_switch++;
    visit(2'b11);                 // refused
    report(1, 0);                 // a car leaves slot 1
    wait_lcd("SPACE AVAILABLE ");
    m_lcd_switch++;
    visit(2'b00, 1);              // slot 1 taken while the door opens: no slot found
    report(1, 0); report(2, 0); report(4, 0); report(7, 0);
    visit(2'b01);                 // slot 1
    visit(2'b00);                 // slot 2
    visit(2'b11);                 // slot 4: queue now holds 4 records
    check(!host_overflow, "no overflow yet");
    begin
      visit_rec_t lost;
      visit(2'b10);               // slot 7: record dropped
      lost = exp_q.pop_back();
    end
    check(host_overflow, "host queue overflow flagged");
    if (host_overflow) m_overflow++;
    read_records(4);
    // every mechanism must have happened
    check(n_admitted == 8 && n_refused == 1, $sformatf("admitted %0d refused %0d", n_admitted, n_refused));
    check(m_member >= 1, "member identified");
    check(m_new >= 1, "new member given temporary card");
    check(m_reserved_skip >= 1, "reserved slot skipped");
    check(m_filled_skip >= 1, "filled slot skipped");
    check(m_no_slot >= 1, "slot check found no slot");
    check(m_lcd_switch >= 2, "LCD switched messages");
    check(m_overflow >= 1, "host queue overflow");
    check(n_rpt_err >= 2, "malformed RF reports");
    $display("mechanisms: admitted=%0d refused=%0d members=%0d new=%0d reserved_skips=%0d filled_skips=%0d no_slot=%0d lcd_switches=%0d lcd_msgs=%0d rf_errors=%0d overflow=%0d records=%0d coil_steps=%0d",
             n_admitted, n_refused, m_member, m_new, m_reserved_skip, m_filled_skip, m_no_slot,
             m_lcd_switch, lcd_msgs, n_rpt_err, m_overflow, m_records, coil_steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

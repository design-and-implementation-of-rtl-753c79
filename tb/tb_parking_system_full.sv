// tb_parking_system_full -- one complete entrance cycle at the default sizes.
//
// The parking system runs with all parameters at their defaults: 32 slots, one door
// step every 250,000 cycles, 50 steps per opening, LCD power-up wait of 1.5 million
// cycles (a 100 MHz clock is assumed throughout).  The test waits for the LCD to come
// up showing "SPACE AVAILABLE ", reports slots 0 and 1 reserved and 2 filled over RF,
// then brings a member's car (card 01) to the entrance.  It checks that the door turns
// exactly 50 steps, each 250,000 cycles after the previous one, that the visitor is
// identified, that slot 3 (the first empty one, fourth in the chain) is allotted and
// shown as filled, and that the host reads the matching record.  About 15 million
// cycles.
`timescale 1ns/1ps
module tb_parking_system_full;
  import parking_pkg::*;
  localparam int NS = 32, DIV = 250_000, STEPS = 50;

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

  parking_system dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  string lcd_line = "", lcd_buf = "";
  logic prev_e = 0;
  logic [6:0] prev_z = 0;
  longint cyc = 0, last_step = 0;
  int steps = 0, bad_spacing = 0;
  always @(posedge clk) if (!reset) begin
    cyc++;
    if (prev_e && !lcd_e) begin
      if (!lcd_rs && lcd_d == 8'h80) lcd_buf = "";
      else if (lcd_rs) begin
        lcd_buf = {lcd_buf, string'(lcd_d)};
        if (lcd_buf.len() == 16) lcd_line = lcd_buf;
      end
    end
    prev_e = lcd_e;
    if (!reset && z != prev_z && z != 0) begin
      if (steps > 0 && cyc - last_step != DIV) bad_spacing++;
      last_step = cyc;
      steps++;
    end
    prev_z = z;
  end

  task automatic send_word(logic [3:0] w);
    w2 <= w;
    repeat (10) @(posedge clk);
    rf_vt <= 1;
    repeat (100) @(posedge clk);
    rf_vt <= 0;
    repeat (100) @(posedge clk);
  endtask

  task automatic report(int slot, int st);
    send_word({1'b1, 2'(st), 1'(slot >> 4)});
    send_word(4'(slot));
  endtask

  initial begin
    longint t0;
    repeat (3) @(posedge clk);
    reset <= 0;
    wait (lcd_ready);
    @(posedge clk);
    check(lcd_line == "SPACE AVAILABLE ", $sformatf("LCD '%s'", lcd_line));
    check(cyc > 1_500_000, "LCD waited its power-up time");
    report(0, 2); report(1, 2); report(2, 1);
    repeat (10) @(posedge clk);
    check(led_reserv == 32'h3 && led_filled == 32'h4, "slot LEDs after RF reports");
    w4 <= 2'b01;
    w3 <= 1;
    t0 = cyc;
    wait (admitted);
    repeat (2) @(posedge clk);
    #1;
    check(steps == STEPS && bad_spacing == 0,
          $sformatf("door: %0d steps, %0d badly spaced", steps, bad_spacing));
    check(cyc - t0 >= longint'(STEPS) * DIV && cyc - t0 <= longint'(STEPS + 2) * DIV,
          $sformatf("entrance sequence took %0d cycles", cyc - t0));
    check(identified && !new_member, "member identified");
    check(led == 32'h8, "slot 3 allotted");
    check(led_filled == 32'hC, "allotted slot shown filled");
    check(z == 0, "coils released");
    check(!host_empty && host_rec.found && host_rec.slot == 3 && host_rec.card == 2'b01
          && !host_rec.new_member, "host record");
    host_rd <= 1; @(posedge clk); host_rd <= 0; @(posedge clk);
    check(host_empty, "one record");
    w3 <= 0;
    repeat (10) @(posedge clk);
    $display("full size: %0d cycles, %0d door steps", cyc, steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

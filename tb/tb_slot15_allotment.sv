// tb_slot15_allotment -- the 16-slot allotment case: slot 15 is the free one.
//
// Reproduces, on the whole system, the situation of the original's stand-alone slot
// allotment simulation: a 16-slot lot where slot 15 (index 14) is the first free one.
// Slots 1-14 are reported filled or reserved over RF, slot 16 is left empty.  A
// member's car (card 01) must be identified and given slot 15; the next car must get
// slot 16; the lot is then full, the LCD shows "NO SPACE EXIT   " and a third car is
// refused.  The slot search for slot 15 must take 16 cycles (15 checks plus the start).
`timescale 1ns/1ps
module tb_slot15_allotment;
  import parking_pkg::*;
  localparam int NS = 16;
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

  parking_system #(.N_SLOTS(NS), .DIV(4), .DOOR_STEPS(4), .T_POWERUP(30), .T_E_HIGH(2),
                   .T_CMD(5), .T_CLEAR(12)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  string lcd_line = "", lcd_buf = "";
  logic prev_e = 0;
  int n_ref = 0, search_cycles = 0;
  always @(posedge clk) if (!reset) begin
    if (prev_e && !lcd_e) begin
      if (!lcd_rs && lcd_d == 8'h80) lcd_buf = "";
      else if (lcd_rs) begin
        lcd_buf = {lcd_buf, string'(lcd_d)};
        if (lcd_buf.len() == 16) lcd_line = lcd_buf;
      end
    end
    prev_e = lcd_e;
    if (refused) n_ref++;
  end

  // search length: from slot_start to slot_done
  int t_start = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.slot_start) t_start = cyc;
    if (dut.slot_done) search_cycles = cyc - t_start;
  end

  task automatic send_word(logic [3:0] w);
    w2 <= w; repeat (2) @(posedge clk);
    rf_vt <= 1; repeat (3) @(posedge clk);
    rf_vt <= 0; repeat (3) @(posedge clk);
  endtask

  task automatic car(logic [CARD_W-1:0] card);
    int n = 0;
    w4 <= card; w3 <= 1;
    while (!admitted && !refused && n < 3000) begin @(posedge clk); n++; end
    repeat (3) @(posedge clk);
    #1;
  endtask

  task automatic leave();
    w3 <= 0; repeat (6) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    reset <= 0;
    for (int s = 0; s < 14; s++) begin
      send_word({1'b1, (s % 3 == 0) ? 2'b10 : 2'b01, 1'b0});
      send_word(4'(s));
    end
    repeat (10) @(posedge clk);
    check((led_filled | led_reserv) == 16'h3FFF, "slots 1-14 occupied");
    car(2'b01);
    check(identified && !new_member, "member identified");
    check(led == 16'h4000 && dut.u_slot.slot == 14, "slot 15 (index 14) allotted");
    check(search_cycles == 16, $sformatf("search took %0d cycles", search_cycles));
    leave();
    car(2'b00);
    check(new_member && led == 16'h8000, "new member gets slot 16");
    leave();
    while (!(lcd_ready && lcd_line == "NO SPACE EXIT   ") && cyc < 100000) @(posedge clk);
    check(lcd_line == "NO SPACE EXIT   ", "LCD shows no space");
    car(2'b10);
    check(n_ref == 1, "third car refused");
    leave();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

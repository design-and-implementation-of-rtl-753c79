// tb_lcd_controller -- self-checking test of the character-LCD controller.
//
// Runs with short delays (power-up 40, e pulse 3, command wait 10, clear wait 30
// cycles).  A monitor plays the LCD: it latches {rs, d} on every falling edge of e and
// measures the e pulse width, the quiet time before e rises again and whether d/rs were
// stable while e was high.  The test expects the initialisation commands, then address
// 80h and the 16 characters of the message for the current space_available value, and
// a rewrite with the other message each time space_available changes.  rw must stay 0.
`timescale 1ns/1ps
module tb_lcd_controller;
  localparam int TP = 40, TE = 3, TC = 10, TCL = 30;
  logic clk = 0, rst = 1, space_available = 1;
  logic [7:0] d;
  logic e, rs, rw, ready;
  int checks = 0, failures = 0;

  lcd_controller #(.T_POWERUP(TP), .T_E_HIGH(TE), .T_CMD(TC), .T_CLEAR(TCL)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // LCD side monitor
  logic [8:0] got [$];
  int e_len = 0, low_len = 0, last_low = 0;
  logic [8:0] held;
  logic prev_e = 0, prev_long = 0;
  always @(posedge clk) if (!rst) begin
    check(rw == 1'b0, "rw held at write");
    if (e) begin
      if (!prev_e) begin
        held = {rs, d};
        if (got.size() > 0)
          check(low_len >= (prev_long ? TCL : TC), $sformatf("wait before next transfer %0d", low_len));
        e_len = 0;
      end
      check({rs, d} == held, "d/rs stable while e high");
      e_len++;
    end else begin
      if (prev_e) begin
        check(e_len == TE, $sformatf("e high for %0d cycles", e_len));
        got.push_back(held);
        prev_long = (held == 9'h038 && got.size() <= 2) || held == 9'h001;
        low_len = 0;
      end
      low_len++;
    end
    prev_e = e;
  end

  function automatic string msg(bit avail);
    return avail ? "SPACE AVAILABLE " : "NO SPACE EXIT   ";
  endfunction

  task automatic expect_message(bit avail);
    string m = msg(avail);
    check(got.size() >= 17, $sformatf("17 transfers per message, got %0d", got.size()));
    if (got.size() >= 17) begin
      check(got[0] == 9'h080, "set address 80h");
      for (int i = 0; i < 16; i++)
        check(got[1+i] == {1'b1, m[i]}, $sformatf("char %0d = %h", i, got[1+i]));
      for (int i = 0; i < 17; i++) void'(got.pop_front());
    end
  endtask

  task automatic wait_ready();
    int n = 0;
    do begin @(posedge clk); n++; end while (!(ready && !e) && n < 5000);
    check(n < 5000, "ready");
    repeat (2) @(posedge clk);
  endtask

  initial begin
    static logic [8:0] init_cmds [6] = '{9'h038, 9'h038, 9'h038, 9'h00C, 9'h001, 9'h006};
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (TP - 2) @(posedge clk);
    check(got.size() == 0 && !e, "quiet during power-up wait");
    wait_ready();
    check(got.size() == 23, $sformatf("init + message = 23 transfers, got %0d", got.size()));
    for (int i = 0; i < 6; i++) check(got[i] == init_cmds[i], $sformatf("init cmd %0d", i));
    for (int i = 0; i < 6; i++) void'(got.pop_front());
    expect_message(1'b1);
    // status changes: line 1 is rewritten
    space_available <= 0;
    @(posedge clk); @(posedge clk);
    check(!ready, "not ready while message is stale");
    wait_ready();
    check(got.size() == 17, "one message");
    expect_message(1'b0);
    // a change and back during a rewrite ends with the latest value shown
    space_available <= 1;
    repeat (50) @(posedge clk);
    space_available <= 0;
    wait_ready();
    check(got.size() == 34, "two messages back to back");
    expect_message(1'b1);
    expect_message(1'b0);
    space_available <= 1;
    wait_ready();
    expect_message(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

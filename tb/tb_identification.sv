// tb_identification -- self-checking test of the visitor identification machine.
//
// Uses member mask 0110 (codes 1 and 2 are members) so that member and non-member
// codes are both above and below each other.  For a long random sequence of card codes
// the testbench predicts the outcome: member -> identified with person = code;
// otherwise new_member with the next temporary card number, counting up from 0 and
// wrapping at 16.  Also checked: done two cycles after start, busy while identifying,
// results held between visits, a start while busy is ignored.
`timescale 1ns/1ps
module tb_identification;
  import parking_pkg::*;
  localparam logic [3:0] MASK = 4'b0110;
  logic clk = 0, rst = 1, start = 0;
  logic [CARD_W-1:0] card = 0;
  logic busy, done, identified, new_member;
  logic [CARD_W-1:0] person;
  logic [TEMP_W-1:0] temp_card;
  int checks = 0, failures = 0;

  identification #(.MEMBER_MASK(MASK)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int next_temp = 0, n_members = 0, n_new = 0, wraps = 0;
  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk); #1;
    check(!identified && !new_member && !done && !busy, "reset outputs");
    for (int n = 0; n < 200; n++) begin
      logic [CARD_W-1:0] c;
      logic [TEMP_W-1:0] t_before;
      c = CARD_W'($urandom);
      t_before = temp_card;
      start <= 1; card <= c;
      @(posedge clk); #1;
      start <= 1;                      // held high: must not restart
      check(busy && !done, "busy while identifying");
      @(posedge clk); #1;
      start <= 0;
      check(done, "done two cycles after start");
      check(person == c, "person code");
      if (MASK[c]) begin
        check(identified && !new_member, "member identified");
        check(temp_card == t_before, "no temporary card for a member");
        n_members++;
      end else begin
        check(!identified && new_member, "new member");
        check(int'(temp_card) == next_temp, $sformatf("temp card %0d exp %0d", temp_card, next_temp));
        next_temp = (next_temp + 1) % 16;
        if (next_temp == 0) wraps++;
        n_new++;
      end
      @(posedge clk); #1;
      check(!done, "done is one cycle");
      repeat ($urandom_range(2, 4)) @(posedge clk);
      #1 check(person == c, "results held");
    end
    check(n_members > 0 && n_new > 0 && wraps > 0, "members, new members and wrap seen");
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

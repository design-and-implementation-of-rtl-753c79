// tb_slot_status -- self-checking test of the slot status register.
//
// Random RF reports and allotment writes, sometimes to the same slot in the same cycle,
// are applied with the full 32 slots.  A reference array updated by the rules (report
// wins, allotment marks filled, reset empties all) is compared each cycle with the
// filled and reserved LED vectors, the empty vector and space_available.  The lot is
// also driven completely full to see space_available fall.
`timescale 1ns/1ps
module tb_slot_status;
  import parking_pkg::*;
  localparam int NS = 32;
  logic clk = 0, rst = 1;
  logic rpt_valid = 0, alloc_we = 0;
  logic [SLOT_W-1:0] rpt_slot = 0, alloc_slot = 0;
  slot_state_e rpt_status = SLOT_EMPTY;
  logic [NS-1:0] led_filled, led_reserv, slot_empty;
  logic space_available;
  int checks = 0, failures = 0;

  slot_status #(.N_SLOTS(NS)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int ref_st [NS];
  int full_seen = 0, same_slot = 0;

  task automatic compare();
    logic [NS-1:0] f = 0, r = 0, e = 0;
    for (int i = 0; i < NS; i++) begin
      f[i] = ref_st[i] == 1; r[i] = ref_st[i] == 2; e[i] = ref_st[i] == 0;
    end
    check(led_filled == f, "led_filled");
    check(led_reserv == r, "led_reserv");
    check(slot_empty == e, "slot_empty");
    check(space_available == (e != 0), "space_available");
    if (e == 0) full_seen++;
  endtask

  initial begin
    foreach (ref_st[i]) ref_st[i] = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk); #1 compare();
    for (int n = 0; n < 3000; n++) begin
      bit rv, av; int rs_, as_, st;
      rv = $urandom_range(0, 2) == 0;
      av = $urandom_range(0, 2) == 0;
      rs_ = $urandom_range(0, NS - 1);
      as_ = (av && rv && $urandom_range(0, 3) == 0) ? rs_ : $urandom_range(0, NS - 1);
      // phase 2: mostly fill the lot
      st = (n > 2000 && n < 2600) ? 1 : $urandom_range(0, 2);
      rpt_valid <= rv; rpt_slot <= SLOT_W'(rs_); rpt_status <= slot_state_e'(st);
      alloc_we <= av; alloc_slot <= SLOT_W'(as_);
      @(posedge clk);
      if (av) ref_st[as_] = 1;
      if (rv) ref_st[rs_] = st;
      if (av && rv && as_ == rs_) same_slot++;
      #1 compare();
    end
    rpt_valid <= 0; alloc_we <= 0;
    rst <= 1; @(posedge clk); rst <= 0;
    foreach (ref_st[i]) ref_st[i] = 0;
    #1 compare();
    check(full_seen > 0, "lot was full at least once");
    check(same_slot > 0, "same-slot collision exercised");
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

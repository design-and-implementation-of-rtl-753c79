// tb_slot_checker -- self-checking test of the ordered slot search.
//
// With the full 32 slots, random occupancy patterns (from nearly empty to completely
// full) are presented and a search is started.  The expected slot is the lowest-index
// empty one, worked out by the testbench.  Checked per search: found, slot, the one-hot
// allot LED vector, a single alloc_we pulse together with done, and the latency, k+2
// cycles from the start pulse for the first empty slot at index k and N_SLOTS+1 when
// none is empty.  A start during a search must be ignored.
`timescale 1ns/1ps
module tb_slot_checker;
  import parking_pkg::*;
  localparam int NS = 32;
  logic clk = 0, rst = 1, start = 0;
  logic [NS-1:0] slot_empty = 0;
  logic busy, done, found, alloc_we;
  logic [SLOT_W-1:0] slot;
  logic [NS-1:0] led_slotallot;
  int checks = 0, failures = 0;

  slot_checker #(.N_SLOTS(NS)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int none_cnt = 0, found_cnt = 0;
  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int n = 0; n < 400; n++) begin
      logic [NS-1:0] pat;
      int k, cyc, allocs;
      case (n % 4)
        0: pat = {$urandom, $urandom} ;
        1: pat = NS'(1) << $urandom_range(0, NS - 1);
        2: pat = '0;
        default: pat = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      endcase
      k = -1;
      for (int i = NS - 1; i >= 0; i--) if (pat[i]) k = i;
      slot_empty <= pat;
      start <= 1;
      @(posedge clk);
      start <= 0;
      cyc = 1; allocs = 0;
      while (!done && cyc < 100) begin
        if (n % 5 == 0 && cyc == 2) start <= 1; else start <= 0;
        @(posedge clk); #1; cyc++;
        if (alloc_we) allocs++;
      end
      start <= 0;
      if (k >= 0) begin
        check(found && int'(slot) == k, $sformatf("found slot %0d exp %0d", slot, k));
        check(led_slotallot == (NS'(1) << k), "one-hot allot LED");
        check(allocs == 1 && alloc_we, "one alloc_we with done");
        check(cyc == k + 2, $sformatf("latency %0d exp %0d", cyc, k + 2));
        found_cnt++;
      end else begin
        check(!found && led_slotallot == 0 && allocs == 0, "no slot when full");
        check(cyc == NS + 1, $sformatf("full-lot latency %0d", cyc));
        none_cnt++;
      end
      @(posedge clk); #1;
      check(!busy && !done, "idle after search");
    end
    check(none_cnt > 0 && found_cnt > 0, "both outcomes");
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

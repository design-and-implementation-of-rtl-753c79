// tb_rf_slot_receiver -- self-checking test of the HT12D report receiver.
//
// Plays the HT12D decoder: each word is put on rf_d, then VT is raised for a few cycles
// and lowered, with random gaps, as the decoder does for every received transmission.
// Reports are built from random slot numbers and status codes; the expected result of
// each (a report with that slot and status, or an error for status 11 or a slot number
// of N_SLOTS or more) is queued and compared with what the receiver produces.  Stray
// second words sent while a first word is expected must be dropped silently.  Also
// checks that a report leaves within 5 cycles of the VT rise of its second word.
// N_SLOTS is set to 20 so that out-of-range slot numbers can be sent.
`timescale 1ns/1ps
module tb_rf_slot_receiver;
  import parking_pkg::*;
  localparam int NS = 20;
  logic clk = 0, rst = 1, vt = 0;
  logic [3:0] rf_d = 0;
  logic rpt_valid, rpt_error;
  logic [SLOT_W-1:0] rpt_slot;
  slot_state_e rpt_status;
  int checks = 0, failures = 0;

  rf_slot_receiver #(.N_SLOTS(NS)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  typedef struct { bit err; int slot; int st; } exp_t;
  exp_t exp_q [$];
  int n_ok = 0, n_err = 0, since_edge = 0;

  task automatic send_word(logic [3:0] w);
    rf_d <= w;
    repeat ($urandom_range(1, 3)) @(posedge clk);
    vt <= 1;
    since_edge = 0;
    repeat ($urandom_range(2, 6)) @(posedge clk);
    vt <= 0;
    repeat ($urandom_range(5, 8)) @(posedge clk);
  endtask

  always @(posedge clk) if (!rst) begin
    since_edge++;
    if (rpt_valid || rpt_error) begin
      check(!(rpt_valid && rpt_error), "valid and error together");
      check(exp_q.size() > 0, "unexpected report");
      if (exp_q.size() > 0) begin
        exp_t x;
        x = exp_q.pop_front();
        check(since_edge <= 5, $sformatf("report latency %0d", since_edge));
        if (x.err) begin
          check(rpt_error, "expected error");
          n_err++;
        end else begin
          check(rpt_valid && int'(rpt_slot) == x.slot && int'(rpt_status) == x.st,
                $sformatf("report slot %0d st %0d, exp %0d %0d", rpt_slot, rpt_status, x.slot, x.st));
          n_ok++;
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    for (int i = 0; i < 300; i++) begin
      int slot, st;
      slot = $urandom_range(0, 31);
      st   = $urandom_range(0, 3);
      if (i % 7 == 3) send_word({1'b0, 3'($urandom)});   // stray word: dropped
      exp_q.push_back('{err: (st == 3 || slot >= NS), slot: slot, st: st});
      send_word({1'b1, 2'(st), 1'(slot >> 4)});
      send_word(4'(slot));
    end
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0, "all reports seen");
    check(n_ok > 100 && n_err > 20, $sformatf("mix of reports %0d / errors %0d", n_ok, n_err));
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

// tb_data_buffer -- self-checking test of the host record queue.
//
// Depth 4.  Random pushes of random visit records and random pops (never from an empty
// queue, which the block asserts against) are compared with a SystemVerilog queue:
// rd_data must be the oldest record, empty/full/count must match, a push into a full
// buffer (even with a pop in the same cycle) must be dropped and set the sticky overflow flag, and push with pop in the
// same cycle must keep the count.
`timescale 1ns/1ps
module tb_data_buffer;
  import parking_pkg::*;
  localparam int D = 4;
  logic clk = 0, rst = 1, wr_en = 0, rd_en = 0;
  visit_rec_t wr_data = '0, rd_data;
  logic empty, full, overflow;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;

  data_buffer #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  visit_rec_t q [$];
  bit m_ovf = 0;
  int drops = 0, both = 0;
  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk); #1;
    for (int n = 0; n < 3000; n++) begin
      bit w, r;
      visit_rec_t v;
      w = $urandom_range(0, 99) < ((n / 500) % 2 ? 70 : 35);
      r = (q.size() > 0) && ($urandom_range(0, 99) < 50);
      v = visit_rec_t'($urandom);
      check(empty == (q.size() == 0), $sformatf("empty %0d q %0d cnt %0d", empty, q.size(), count));
      check(full == (q.size() == D), "full");
      check(int'(count) == q.size(), "count");
      check(overflow == m_ovf, "overflow flag");
      if (q.size() > 0) check(rd_data == q[0], "oldest record on rd_data");
      wr_en <= w; rd_en <= r; wr_data <= v;
      @(posedge clk); #1;
      if (w && q.size() == D) begin m_ovf = 1; drops++; w = 0; end
      if (r) void'(q.pop_front());
      if (w) q.push_back(v);
      if (w && r) both++;
    end
    wr_en <= 0; rd_en <= 0;
    check(drops > 0 && both > 0, "overflow and simultaneous push/pop exercised");
    rst <= 1; @(posedge clk); rst <= 0; @(posedge clk); #1;
    check(empty && !overflow, "reset clears queue and flag");
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

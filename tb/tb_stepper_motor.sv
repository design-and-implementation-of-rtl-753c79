// tb_stepper_motor -- self-checking test of the door stepper sequencer.
//
// Runs with DIV = 4 and DOOR_STEPS = 6.  A cycle-by-cycle reference model, written from
// the specification rather than from the RTL, predicts cnt/clkd (toggle every DIV
// cycles) and the coil pattern: idle 0000, then one wave-drive step per tick in the
// order 0001, 0010, 0100, 1000, continuing from the last phase on the next opening,
// release to 0000 with a done pulse one tick after the last step.  Every cycle the
// outputs are compared with the model; also checked: steps are exactly DIV cycles apart,
// each opening makes DOOR_STEPS steps, a start while busy is ignored.
`timescale 1ns/1ps
module tb_stepper_motor;
  localparam int DIV = 4, STEPS = 6;
  logic clk = 0, rst = 1, start = 0;
  logic [3:0] z;
  logic clkd, busy, done;
  int checks = 0, failures = 0;

  stepper_motor #(.DIV(DIV), .DOOR_STEPS(STEPS)) dut (.*);

  always #5 clk = ~clk;

  // reference model state
  int m_cnt, m_left, m_phase, steps_seen, last_change;
  logic m_clkd, m_busy, m_done;
  logic [3:0] m_z;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic model_step(input bit st);
    bit tick = (m_cnt == DIV - 1);
    m_done = 0;
    if (!m_busy) begin
      if (st) begin m_busy = 1; m_left = STEPS; end
    end else if (tick) begin
      if (m_left == 0) begin m_busy = 0; m_done = 1; m_z = 0; end
      else begin m_phase = (m_phase + 1) % 4; m_z = 4'(1 << m_phase); m_left--; end
    end
    if (tick) begin m_cnt = 0; m_clkd = ~m_clkd; end else m_cnt++;
  endtask

  int openings = 0, dones = 0, cyc = 0;
  initial begin
    m_cnt = 0; m_clkd = 0; m_busy = 0; m_done = 0; m_z = 0; m_phase = 3; m_left = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (cyc = 0; cyc < 400; cyc++) begin
      bit st;
      st = (cyc == 5) || (cyc == 12) || (cyc == 150) || ($urandom_range(0, 40) == 0);
      start <= st;
      @(posedge clk);
      model_step(st);
      #1;
      check(z == m_z, $sformatf("z=%b exp %b", z, m_z));
      check(clkd == m_clkd, "clkd");
      check(busy == m_busy, "busy");
      check(done == m_done, "done");
      if (done) dones++;
      if (z != 0 && z != dut_prev_z) begin
        if (steps_seen > 0 && !(dut_prev_z == 0))
          check(cyc - last_change == DIV, $sformatf("step spacing %0d", cyc - last_change));
        last_change = cyc;
        steps_seen++;
      end
      dut_prev_z = z;
    end
    check(dones >= 2, "at least two openings completed");
    check(steps_seen == dones * STEPS || steps_seen == dones * STEPS + (busy ? STEPS - m_left : 0),
          $sformatf("steps per opening: %0d steps, %0d openings", steps_seen, dones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [3:0] dut_prev_z = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

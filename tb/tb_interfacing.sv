// tb_interfacing -- self-checking test of the stepper + LCD output block.
//
// Short timings (step every 3 cycles, 5 steps per opening; LCD power-up 20, e pulse 2,
// waits 6 / 15 cycles).  Checks that the LCD receives the 6 initialisation commands,
// address 80h and "NO SPACE EXIT   " with space_available = 0, then "SPACE AVAILABLE "
// after it rises; that each door_start gives 5 coil steps in wave-drive order
// continuing the rotation, steps DIV cycles apart, then release and door_done; and that
// both run at the same time without disturbing each other.
`timescale 1ns/1ps
module tb_interfacing;
  localparam int DIV = 3, STEPS = 5;
  logic clk = 0, rst = 1, door_start = 0, space_available = 0;
  logic [7:0] d;
  logic [3:0] z;
  logic e, rs, rw, clkd, door_busy, door_done, lcd_ready;
  int checks = 0, failures = 0;

  interfacing #(.DIV(DIV), .DOOR_STEPS(STEPS), .T_POWERUP(20), .T_E_HIGH(2), .T_CMD(6),
                .T_CLEAR(15)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [8:0] got [$];
  logic prev_e = 0;
  logic [3:0] prev_z = 0;
  logic [3:0] exp_z = 4'b1000;
  int steps = 0, dones = 0, last_step = 0, cyc = 0;
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (prev_e && !e) got.push_back({rs, d});
    prev_e = e;
    check(rw == 0, "rw");
    if (z != prev_z && z != 0) begin
      exp_z = {exp_z[2:0], exp_z[3]};
      check(z == exp_z, $sformatf("coil order %b exp %b", z, exp_z));
      if (prev_z != 0) check(cyc - last_step == DIV, "step spacing");
      last_step = cyc;
      steps++;
    end
    prev_z = z;
    if (door_done) dones++;
  end

  task automatic expect_text(string m);
    check(got.size() >= 17 && got[0] == 9'h080, "address command");
    for (int i = 0; i < 16 && i + 1 < got.size(); i++)
      check(got[1+i] == {1'b1, m[i]}, $sformatf("char %0d", i));
    got.delete();
  endtask

  initial begin
    static logic [8:0] init_cmds [6] = '{9'h038, 9'h038, 9'h038, 9'h00C, 9'h001, 9'h006};
    repeat (2) @(posedge clk);
    rst <= 0;
    repeat (5) @(posedge clk);
    door_start <= 1; @(posedge clk); door_start <= 0;      // door opens during LCD init
    wait (lcd_ready);
    @(posedge clk);
    check(got.size() == 23, $sformatf("23 transfers, got %0d", got.size()));
    for (int i = 0; i < 6 && i < got.size(); i++) check(got[i] == init_cmds[i], "init");
    for (int i = 0; i < 6; i++) void'(got.pop_front());
    expect_text("NO SPACE EXIT   ");
    check(dones == 1 && steps == STEPS, $sformatf("first opening: %0d steps", steps));
    space_available <= 1;
    door_start <= 1; @(posedge clk); door_start <= 0;
    repeat (3) @(posedge clk);
    wait (lcd_ready && !door_busy);
    repeat (3) @(posedge clk);
    expect_text("SPACE AVAILABLE ");
    check(dones == 2 && steps == 2 * STEPS, $sformatf("second opening: %0d steps", steps));
    check(z == 0, "coils released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

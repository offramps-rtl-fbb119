// tb_homing_detector: self-checking test of the homing state machine.
// Applies endstop trip pulses in and out of order, including the double
// "bump" the firmware makes on each axis, and checks the state, that `homed`
// rises exactly one cycle after the Z trip that completes X->Y->Z, that
// `homed_pulse` is a single cycle, and that an X trip after homing re-arms.
module tb_homing_detector;
  logic clk = 0, rst_n = 0;
  logic [2:0] endstop_rise = '0;
  logic homed, homed_pulse;
  logic [1:0] state;
  int checks = 0, failures = 0, pulses = 0;

  homing_detector dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) if (homed_pulse) pulses++;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t state=%0d)", what, $time, state); end
  endtask

  task automatic trip(input int axis);
    @(negedge clk) endstop_rise = 3'b1 << axis;
    @(negedge clk) endstop_rise = '0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(negedge clk);
    check(state == 0 && !homed, "reset in WAIT_X");
    trip(1); trip(2);                        // Y, Z before X: ignored
    check(state == 0 && !homed, "out-of-order trips ignored");
    trip(0); check(state == 1, "X -> WAIT_Y");
    trip(0); check(state == 1, "second X bump ignored");
    trip(2); check(state == 1, "Z while waiting for Y ignored");
    trip(1); check(state == 2, "Y -> WAIT_Z");
    trip(1); check(state == 2 && !homed, "second Y bump ignored");
    // Z trip: homed must rise exactly one cycle later
    @(negedge clk) endstop_rise = 3'b100;
    check(!homed, "homed not yet in the Z cycle");
    @(negedge clk) endstop_rise = '0;
    check(homed && homed_pulse, "homed and pulse one cycle after Z");
    @(negedge clk);
    check(homed && !homed_pulse, "pulse lasts one cycle");
    trip(2); trip(1);
    check(homed && pulses == 1, $sformatf("Z/Y bumps after homing keep homed (pulses=%0d)", pulses));
    // next print: X trip re-arms
    trip(0); check(!homed && state == 1, "X after homing re-arms");
    trip(1); trip(2);
    check(homed && pulses == 2, "second homing completes");
    // reset mid-sequence
    trip(0);
    @(negedge clk) rst_n = 0;
    @(negedge clk) rst_n = 1;
    check(state == 0 && !homed, "reset returns to WAIT_X");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_trojan_control: self-checking test of the nine Trojans.
// The testbench plays the firmware: it drives STEP pulses (5 cycles high) and
// the heater/fan/EN levels, and derives the STEP edges itself. It counts STEP
// rising edges on the module's output per axis and compares them with counts
// worked out from each Trojan's rule, in phases:
//   P0  no Trojan enabled: output equals input one cycle later, every cycle;
//       all enabled but not homed: only the heater Trojans act
//   T1  two intervals: exactly 2 bursts of T1_STEPS<<USTEP extra X and Y
//       pulses; a long firmware X pulse at the burst time delays the burst
//       (second instance, T1_RANDOM=1: each burst on X or on Y, predicted
//       with an own copy of the LFSR)
//   T2  every second extruder pulse masked (second instance, T2_OVER=1:
//       every second pulse followed by an extra one)
//   T3  extruder pulses doubled (second instance, T3_OVER=0: masked) while Y
//       moves, untouched otherwise
//   T4  extra X/Y pulses on Z steps, predicted with an own copy of the LFSR
//   T5  one Z burst after T5_TRIGGER_ZSTEPS Z steps since homing, only once
//   T6/T7 heater levels; T8 EN forced high T8_OFF of every T8_PERIOD cycles;
//   T9  fan high for exactly T9_DUTY/256 of the time (second instance,
//       T9_OVER=1: fan forced on for that share when the firmware has it off)
// Parameters are scaled down so that every Trojan fires within a short run.
module tb_trojan_control;
  import offramps_pkg::*;
  localparam int T1_INTERVAL = 3000, T1_STEPS = 2, USTEP = 1;
  localparam int INJ_PERIOD = 20, INJ_WIDTH = 4;
  localparam int T3_WINDOW = 200, T4_PROB_LOG2 = 2, T4_STEPS = 1;
  localparam int T5_TRIG = 10, T5_STEPS = 3;
  localparam int T8_PERIOD = 1000, T8_OFF = 300, T9_DUTY = 64;
  localparam logic [15:0] SEED = 16'hACE1;

  logic clk = 0, rst_n = 0, homed = 0;
  logic [8:0] trojan_en = '0;
  ctrl_t in_ctrl = '0, out_ctrl, out_under;
  logic [3:0] prev_step = '0, step_rise, step_fall;
  logic [8:0] active, active_u;
  int checks = 0, failures = 0;

  assign step_rise = in_ctrl.step & ~prev_step;
  assign step_fall = ~in_ctrl.step & prev_step;
  always @(posedge clk) prev_step <= in_ctrl.step;

  trojan_control #(
    .T1_INTERVAL(T1_INTERVAL), .T1_STEPS(T1_STEPS), .T2_DROP_EVERY(2),
    .T3_WINDOW(T3_WINDOW), .T3_OVER(1'b1), .T4_PROB_LOG2(T4_PROB_LOG2),
    .T4_STEPS(T4_STEPS), .T5_TRIGGER_ZSTEPS(T5_TRIG), .T5_STEPS(T5_STEPS),
    .T8_PERIOD(T8_PERIOD), .T8_OFF(T8_OFF), .T9_DUTY(T9_DUTY),
    .USTEP_LOG2(USTEP), .INJ_PERIOD(INJ_PERIOD), .INJ_WIDTH(INJ_WIDTH),
    .LFSR_SEED(SEED)
  ) dut (.*);

  trojan_control #(
    .T1_INTERVAL(T1_INTERVAL), .T1_STEPS(T1_STEPS), .T2_DROP_EVERY(2),
    .T1_RANDOM(1'b1), .T2_OVER(1'b1), .T3_WINDOW(T3_WINDOW), .T3_OVER(1'b0), .T4_PROB_LOG2(T4_PROB_LOG2),
    .T4_STEPS(T4_STEPS), .T5_TRIGGER_ZSTEPS(T5_TRIG), .T5_STEPS(T5_STEPS),
    .T8_PERIOD(T8_PERIOD), .T8_OFF(T8_OFF), .T9_DUTY(T9_DUTY), .T9_OVER(1'b1),
    .USTEP_LOG2(USTEP), .INJ_PERIOD(INJ_PERIOD), .INJ_WIDTH(INJ_WIDTH),
    .LFSR_SEED(SEED)
  ) dut_under (.clk, .rst_n, .trojan_en, .homed, .in_ctrl, .step_rise, .step_fall,
               .out_ctrl(out_under), .active(active_u));

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // output edge counters
  int out_rises [4], under_rises [4];
  logic [3:0] out_prev = '0, under_prev = '0;
  always @(posedge clk) begin
    for (int a = 0; a < 4; a++) begin
      if (out_ctrl.step[a] && !out_prev[a]) out_rises[a]++;
      if (out_under.step[a] && !under_prev[a]) under_rises[a]++;
    end
    out_prev <= out_ctrl.step;
    under_prev <= out_under.step;
  end
  task automatic clear_counts();
    for (int a = 0; a < 4; a++) begin out_rises[a] = 0; under_rises[a] = 0; end
  endtask

  // reference LFSR and T4 prediction
  logic [15:0] lfsr_ref;
  int t4_x = 0, t4_y = 0, t1r_x = 0, t1r_y = 0;
  int t1_ticks = 0;
  logic [15:0] t1_timer_ref = '0;
  always @(posedge clk) begin
    if (!rst_n) lfsr_ref <= SEED;
    else begin
      // T1 interval: the second instance picks X or Y from LFSR bit 14
      if (trojan_en[TJ_T1] && homed) begin
        if (t1_timer_ref == 16'(T1_INTERVAL - 1)) begin
          t1_timer_ref <= '0;
          t1_ticks++;
          if (lfsr_ref[14]) t1r_y++; else t1r_x++;
        end else t1_timer_ref <= t1_timer_ref + 16'd1;
      end else t1_timer_ref <= '0;
      if (trojan_en[TJ_T4] && homed && step_rise[AX_Z] && lfsr_ref[T4_PROB_LOG2-1:0] == '0) begin
        if (lfsr_ref[15]) t4_y++; else t4_x++;
      end
      lfsr_ref <= lfsr_ref[0] ? ((lfsr_ref >> 1) ^ 16'hB400) : (lfsr_ref >> 1);
    end
  end

  task automatic pulse(input int axis, input int gap = 40);
    @(negedge clk) in_ctrl.step[axis] = 1'b1;
    repeat (5) @(negedge clk);
    in_ctrl.step[axis] = 1'b0;
    repeat (gap) @(negedge clk);
  endtask

  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  // P0 pass-through monitor
  bit   pass_check = 0;
  ctrl_t in_d;
  always @(posedge clk) begin
    if (pass_check) begin
      checks++;
      if (out_ctrl !== in_d) begin failures++; $display("pass-through mismatch %h %h", out_ctrl, in_d); end
    end
    in_d <= in_ctrl;
  end

  initial begin
    int n_hi, fan_hi, fan_hi_o;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    idle(2);

    // ---------------- P0: nothing enabled, random traffic
    pass_check = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_ctrl = ctrl_t'($urandom);
    end
    @(negedge clk); in_ctrl = '0;
    @(negedge clk); pass_check = 0;
    // all enabled, not homed: steps, EN and fan untouched; T7 forces heaters
    trojan_en = '1; clear_counts();
    in_ctrl.fan = 1;
    for (int i = 0; i < 5; i++) begin pulse(AX_X); pulse(AX_E); pulse(AX_Z); pulse(AX_Y); end
    check(out_rises[AX_X] == 5 && out_rises[AX_Y] == 5 && out_rises[AX_Z] == 5 && out_rises[AX_E] == 5,
          "no step change before homing");
    check(out_ctrl.en == 4'b0000 && out_ctrl.fan, "EN and fan untouched before homing");
    check(out_ctrl.heat_bed && out_ctrl.heat_end, "T7 acts before homing");
    check(active == 9'b001100000, "only T6/T7 active before homing");
    trojan_en = '0; in_ctrl = '0;
    homed = 1;
    idle(5);

    // ---------------- T1
    clear_counts();
    @(negedge clk) trojan_en = 9'b1 << TJ_T1;
    idle(T1_INTERVAL - 12);
    in_ctrl.step[AX_X] = 1;            // firmware X pulse spanning the first burst time
    idle(100);
    in_ctrl.step[AX_X] = 0;
    check(out_rises[AX_X] == 1, "T1 burst held off while firmware STEP high");
    idle(T1_INTERVAL + 400);
    trojan_en = '0;
    idle(300);
    check(out_rises[AX_X] == 1 + 2 * (T1_STEPS << USTEP),
          $sformatf("T1 X pulses %0d", out_rises[AX_X]));
    check(out_rises[AX_Y] == 2 * (T1_STEPS << USTEP), $sformatf("T1 Y pulses %0d", out_rises[AX_Y]));
    check(out_rises[AX_Z] == 0 && out_rises[AX_E] == 0, "T1 leaves Z/E alone");
    $display("T1 random bursts: x=%0d y=%0d", t1r_x, t1r_y);
    check(t1_ticks == 2 && t1r_x + t1r_y == 2, $sformatf("T1 reference saw %0d intervals", t1_ticks));
    check(under_rises[AX_X] == 1 + t1r_x * (T1_STEPS << USTEP) &&
          under_rises[AX_Y] == t1r_y * (T1_STEPS << USTEP),
          $sformatf("T1 random: X %0d Y %0d pulses, expected %0d/%0d bursts",
                    under_rises[AX_X], under_rises[AX_Y], t1r_x, t1r_y));

    // ---------------- T2
    clear_counts();
    trojan_en = 9'b1 << TJ_T2;
    for (int i = 0; i < 20; i++) pulse(AX_E);
    for (int i = 0; i < 4; i++) pulse(AX_X);
    trojan_en = '0;
    check(out_rises[AX_E] == 10, $sformatf("T2 E pulses %0d of 20", out_rises[AX_E]));
    check(under_rises[AX_E] == 30, $sformatf("T2 over: E pulses %0d for 20", under_rises[AX_E]));
    check(out_rises[AX_X] == 4, "T2 leaves X alone");

    // ---------------- T3 (over on dut, under on dut_under)
    idle(T3_WINDOW + 10);
    clear_counts();
    trojan_en = 9'b1 << TJ_T3;
    for (int i = 0; i < 5; i++) begin pulse(AX_Y, 20); pulse(AX_E, 60); end
    check(out_rises[AX_E] == 10, $sformatf("T3 over: E pulses %0d of 5 during Y", out_rises[AX_E]));
    check(under_rises[AX_E] == 0, $sformatf("T3 under: E pulses %0d of 5 during Y", under_rises[AX_E]));
    idle(T3_WINDOW + 10);
    clear_counts();
    for (int i = 0; i < 5; i++) pulse(AX_E, 60);
    check(out_rises[AX_E] == 5 && under_rises[AX_E] == 5, "T3 idle when Y is not moving");
    trojan_en = '0;

    // ---------------- T4
    clear_counts();
    trojan_en = 9'b1 << TJ_T4;
    for (int i = 0; i < 60; i++) pulse(AX_Z, 100);
    trojan_en = '0;
    idle(200);
    check(t4_x + t4_y > 0, "T4 fired at least once");
    check(out_rises[AX_X] == t4_x * (T4_STEPS << USTEP) && out_rises[AX_Y] == t4_y * (T4_STEPS << USTEP),
          $sformatf("T4 X %0d/%0d Y %0d/%0d", out_rises[AX_X], t4_x * (T4_STEPS << USTEP),
                    out_rises[AX_Y], t4_y * (T4_STEPS << USTEP)));
    check(out_rises[AX_Z] == 60, "T4 Z untouched");
    $display("T4 hits: x=%0d y=%0d", t4_x, t4_y);

    // ---------------- T5 (re-home first)
    homed = 0; idle(3); homed = 1;
    clear_counts();
    trojan_en = 9'b1 << TJ_T5;
    for (int i = 0; i < T5_TRIG - 1; i++) pulse(AX_Z, 60);
    check(out_rises[AX_Z] == T5_TRIG - 1, "T5 waits for its trigger");
    pulse(AX_Z, 300);
    check(out_rises[AX_Z] == T5_TRIG + (T5_STEPS << USTEP), $sformatf("T5 Z pulses %0d", out_rises[AX_Z]));
    for (int i = 0; i < 20; i++) pulse(AX_Z, 60);
    check(out_rises[AX_Z] == T5_TRIG + 20 + (T5_STEPS << USTEP), "T5 fires only once");
    trojan_en = '0;

    // ---------------- T6 / T7
    in_ctrl.heat_bed = 1; in_ctrl.heat_end = 1;
    trojan_en = 9'b1 << TJ_T6; idle(3);
    check(!out_ctrl.heat_bed && !out_ctrl.heat_end, "T6 heaters off");
    in_ctrl.heat_bed = 0; in_ctrl.heat_end = 0;
    trojan_en = 9'b1 << TJ_T7; idle(3);
    check(out_ctrl.heat_bed && out_ctrl.heat_end, "T7 heaters on");
    trojan_en = '0; idle(3);
    check(!out_ctrl.heat_bed && !out_ctrl.heat_end, "heaters follow firmware again");

    // ---------------- T8
    in_ctrl.en = 4'b0000;
    @(negedge clk) trojan_en = 9'b1 << TJ_T8;
    n_hi = 0;
    for (int i = 0; i < 2 * T8_PERIOD; i++) begin
      @(negedge clk);
      if (out_ctrl.en == 4'b1111) n_hi++;
      else if (out_ctrl.en != 4'b0000) begin failures++; $display("T8 partial EN"); end
    end
    check(n_hi == 2 * T8_OFF, $sformatf("T8 EN high %0d cycles", n_hi));
    trojan_en = '0; idle(3);
    check(out_ctrl.en == 4'b0000, "EN follows firmware after T8");

    // ---------------- T9
    in_ctrl.fan = 1;
    @(negedge clk) trojan_en = 9'b1 << TJ_T9;
    idle(2);
    fan_hi = 0; fan_hi_o = 0;
    for (int i = 0; i < 2 * 65536; i++) begin
      @(negedge clk);
      if (out_ctrl.fan) fan_hi++;
      if (out_under.fan) fan_hi_o++;
    end
    check(fan_hi == 2 * 256 * T9_DUTY, $sformatf("T9 fan high %0d cycles", fan_hi));
    check(fan_hi_o == 2 * 65536, $sformatf("T9 over: firmware-on fan stays on (%0d)", fan_hi_o));
    // Firmware fan off: the under-cooling copy stays off, the over-cooling
    // copy runs at T9_DUTY/256.
    in_ctrl.fan = 0;
    idle(2);
    fan_hi = 0; fan_hi_o = 0;
    for (int i = 0; i < 2 * 65536; i++) begin
      @(negedge clk);
      if (out_ctrl.fan) fan_hi++;
      if (out_under.fan) fan_hi_o++;
    end
    check(fan_hi == 0, $sformatf("T9 under: firmware-off fan stays off (%0d)", fan_hi));
    check(fan_hi_o == 2 * 256 * T9_DUTY, $sformatf("T9 over: fan high %0d cycles", fan_hi_o));
    in_ctrl.fan = 1;
    trojan_en = '0; idle(3);
    check(out_ctrl.fan, "fan follows firmware after T9");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

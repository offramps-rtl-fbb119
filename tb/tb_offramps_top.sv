// tb_offramps_top: end-to-end test of the OffRAMPS FPGA at reduced timings.
// The testbench plays both neighbours: the firmware board (STEP/DIR/EN,
// heaters, fan, display UART) and the printer shield (endstops), and decodes
// the capture stream on uart_txd. One run goes through:
//   1. bypass: random traffic reaches the shield pins unchanged, same cycle;
//   2. homing X, Y, Z with endstops passed back to the firmware;
//   3. a short job with no Trojan: every STEP reaches the shield 3 cycles
//      later; the capture stream reports the commanded step counts, exactly;
//   4. each Trojan T1..T9 enabled in turn, its effect measured on the shield
//      side while the capture (firmware side) still sees the clean counts;
//      then T1, T2 and T7 enabled together, each with its own effect;
//   5. a second homing, which clears the counts.
// Each mechanism is counted; one that never happened is a failure.
module tb_offramps_top;
  import offramps_pkg::*;
  localparam int CPB = 8, CAP = 6000, USTEP = 1, T1I = 3000, T1S = 2;

  logic clk = 0, rst_btn = 1, bypass = 1;
  logic [8:0] trojan_en = '0;
  ctrl_t ard = '0, ramps;
  logic [2:0] ramps_endstop = '0, ard_endstop;
  logic ard_disp_tx = 1, ramps_disp_tx, ramps_disp_rx = 1, ard_disp_rx;
  logic uart_txd;
  logic [1:0] led;
  int checks = 0, failures = 0;

  offramps_top #(
    .CAPTURE_INTERVAL(CAP), .CLKS_PER_BIT(CPB), .T1_INTERVAL(T1I), .T1_STEPS(T1S),
    .T3_WINDOW(200), .T4_PROB_LOG2(2), .T4_STEPS(1), .T5_TRIGGER_ZSTEPS(10), .T5_STEPS(3),
    .T8_PERIOD(1000), .T8_OFF(300), .T9_DUTY(64), .USTEP_LOG2(USTEP),
    .INJ_PERIOD(20), .INJ_WIDTH(4)
  ) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ------------------------------------------------ mechanism counters
  typedef enum int { M_BYPASS, M_HOMING, M_PASS, M_CAPTURE, M_REHOME,
                     M_T1, M_T2, M_T3, M_T4, M_T5, M_T6, M_T7, M_T8, M_T9, M_COMBO, M_N } mech_e;
  int mech [M_N];
  string mech_name [M_N] = '{"bypass", "homing", "trojan-path pass-through", "capture record",
                             "re-homing", "T1", "T2", "T3", "T4", "T5", "T6", "T7", "T8", "T9", "Trojan combination"};

  // ------------------------------------------------ edge counters
  int ard_rises [4], ramps_rises [4];
  logic [3:0] ard_prev = '0, ramps_prev = '0;
  always @(negedge clk) begin
    for (int a = 0; a < 4; a++) begin
      if (ard.step[a] && !ard_prev[a]) ard_rises[a]++;
      if (ramps.step[a] && !ramps_prev[a]) ramps_rises[a]++;
    end
    ard_prev = ard.step;
    ramps_prev = ramps.step;
  end
  task automatic clear_counts();
    for (int a = 0; a < 4; a++) begin ard_rises[a] = 0; ramps_rises[a] = 0; end
  endtask

  // ------------------------------------------------ capture receiver
  byte unsigned rx_q [$];
  initial begin
    forever begin
      logic [7:0] b;
      @(negedge uart_txd);
      #(CPB * 10 / 2);
      for (int i = 0; i < 8; i++) begin #(CPB * 10); b[i] = uart_txd; end
      #(CPB * 10);
      rx_q.push_back(b);
    end
  end
  task automatic get_record(output count_t c [4]);
    logic [127:0] r;
    while (rx_q.size() < 16) @(negedge clk);
    for (int i = 0; i < 16; i++) r = {r[119:0], rx_q.pop_front()};
    for (int a = 0; a < 4; a++) c[a] = count_t'(r[127 - 32 * a -: 32]);
    mech[M_CAPTURE]++;
  endtask

  // ------------------------------------------------ firmware model
  longint pos [4];   // commanded position since homing, firmware side
  task automatic step(input int axis, input bit dir, input int gap = 10);
    @(negedge clk) ard.dir[axis] = dir;
    @(negedge clk) ard.step[axis] = 1'b1;
    repeat (5) @(negedge clk);
    ard.step[axis] = 1'b0;
    pos[axis] += dir ? 1 : -1;
    repeat (gap) @(negedge clk);
  endtask
  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  // Homing: each axis moves negative until its endstop closes, backs off and
  // bumps it again, as the firmware does.
  task automatic home();
    for (int a = 0; a < 3; a++) begin
      for (int k = 0; k < 3; k++) step(a, 0);
      ramps_endstop[a] = 1; idle(4);
      check(ard_endstop[a], "endstop passed to firmware");
      ramps_endstop[a] = 0;
      // the first Z trip completes homing: the capture counts from here on
      if (a == 2) for (int i = 0; i < 4; i++) pos[i] = 0;
      for (int k = 0; k < 2; k++) step(a, 1);
      step(a, 0);
      ramps_endstop[a] = 1; idle(4); ramps_endstop[a] = 0;
      idle(5);
    end
  endtask

  initial begin
    count_t rec [4];
    int lat, fan_low, en_high, ex;
    for (int a = 0; a < 4; a++) pos[a] = 0;
    idle(4);
    rst_btn = 0;
    idle(4);

    // ------------------------------------------ 1. bypass
    for (int i = 0; i < 500; i++) begin
      @(negedge clk) ard = ctrl_t'($urandom);
      #1;
      check(ramps == ard, "bypass: shield pins equal firmware pins");
      ard_disp_tx = 1'($urandom); ramps_disp_rx = 1'($urandom); #1;
      check(ramps_disp_tx == ard_disp_tx && ard_disp_rx == ramps_disp_rx, "display UART passes");
    end
    mech[M_BYPASS]++;
    @(negedge clk) ard = '0; ard_disp_tx = 1; ramps_disp_rx = 1;
    bypass = 0;
    idle(10);

    // ------------------------------------------ 2. homing
    check(led[0] == 0, "not homed after reset");
    home();
    check(led[0] == 1, "homed after X,Y,Z");
    mech[M_HOMING]++;

    // ------------------------------------------ 3. clean job + capture
    clear_counts();
    // latency of the Trojan path
    @(negedge clk) ard.step[AX_X] = 1; lat = 0;
    while (!ramps.step[AX_X]) begin @(negedge clk); lat++; end
    check(lat == 3, $sformatf("trojan-path latency %0d cycles", lat));
    idle(4); ard.step[AX_X] = 0; pos[AX_X] += 0;   // DIR low: this step counts -1
    pos[AX_X] -= 1;
    idle(10);
    for (int i = 0; i < 40; i++) step(AX_X, 1);
    for (int i = 0; i < 25; i++) step(AX_Y, 1);
    for (int i = 0; i < 7; i++)  step(AX_Y, 0);
    for (int i = 0; i < 4; i++)  step(AX_Z, 1);
    for (int i = 0; i < 30; i++) step(AX_E, 1);
    check(led[1] == 1, "capture running after first step");
    for (int a = 0; a < 4; a++)
      check(ramps_rises[a] == ard_rises[a], $sformatf("axis %0d: no Trojan, same steps", a));
    mech[M_PASS]++;
    get_record(rec);                          // first record: job is done by then
    for (int a = 0; a < 4; a++)
      check(rec[a] == count_t'(pos[a]), $sformatf("capture axis %0d: %0d expected %0d", a, rec[a], pos[a]));
    get_record(rec);
    check(rec[AX_X] == count_t'(pos[AX_X]), "second record unchanged");

    // ------------------------------------------ 4. Trojans
    // T1: one interval of X/Y shift while the firmware is idle
    clear_counts();
    @(negedge clk) trojan_en = 9'b1 << TJ_T1;
    idle(T1I + 300);
    trojan_en = '0; idle(50);
    check(ramps_rises[AX_X] - ard_rises[AX_X] == (T1S << USTEP), "T1 shifted X");
    check(ramps_rises[AX_Y] - ard_rises[AX_Y] == (T1S << USTEP), "T1 shifted Y");
    if (ramps_rises[AX_X] > ard_rises[AX_X]) mech[M_T1]++;
    // T2: half of E masked
    clear_counts(); trojan_en = 9'b1 << TJ_T2;
    for (int i = 0; i < 20; i++) step(AX_E, 1, 20);
    trojan_en = '0;
    check(ramps_rises[AX_E] == 10, $sformatf("T2: %0d of 20 E steps reach the shield", ramps_rises[AX_E]));
    if (ramps_rises[AX_E] < ard_rises[AX_E]) mech[M_T2]++;
    // T3: E doubled while Y moves
    clear_counts(); trojan_en = 9'b1 << TJ_T3;
    for (int i = 0; i < 6; i++) begin step(AX_Y, 1, 10); step(AX_E, 1, 60); end
    trojan_en = '0;
    check(ramps_rises[AX_E] == 12, $sformatf("T3: %0d E pulses for 6", ramps_rises[AX_E]));
    if (ramps_rises[AX_E] > ard_rises[AX_E]) mech[M_T3]++;
    // T4: random X/Y shifts on Z steps
    clear_counts(); trojan_en = 9'b1 << TJ_T4;
    for (int i = 0; i < 40; i++) step(AX_Z, 1, 100);
    trojan_en = '0; idle(200);
    ex = (ramps_rises[AX_X] - ard_rises[AX_X]) + (ramps_rises[AX_Y] - ard_rises[AX_Y]);
    check(ex > 0 && ex % (1 << USTEP) == 0, $sformatf("T4 extra X/Y pulses %0d", ex));
    if (ex > 0) mech[M_T4]++;
    // T5: Z steps since homing are past the trigger: one Z shift
    clear_counts(); trojan_en = 9'b1 << TJ_T5;
    idle(300);
    check(ramps_rises[AX_Z] == (3 << USTEP), $sformatf("T5 Z shift %0d pulses", ramps_rises[AX_Z]));
    for (int i = 0; i < 5; i++) step(AX_Z, 1, 60);
    trojan_en = '0;
    check(ramps_rises[AX_Z] == (3 << USTEP) + 5, "T5 only once");
    if (ramps_rises[AX_Z] > ard_rises[AX_Z]) mech[M_T5]++;
    // T6 / T7
    @(negedge clk) ard.heat_bed = 1; ard.heat_end = 1; trojan_en = 9'b1 << TJ_T6; idle(5);
    check(!ramps.heat_bed && !ramps.heat_end, "T6 heaters off");
    if (!ramps.heat_bed) mech[M_T6]++;
    ard.heat_bed = 0; ard.heat_end = 0; trojan_en = 9'b1 << TJ_T7; idle(5);
    check(ramps.heat_bed && ramps.heat_end, "T7 heaters on");
    if (ramps.heat_end) mech[M_T7]++;
    trojan_en = '0; idle(5);
    check(!ramps.heat_bed && !ramps.heat_end, "heaters follow firmware");
    // T8 / T9
    ard.fan = 1; ard.en = '0; trojan_en = (9'b1 << TJ_T8) | (9'b1 << TJ_T9);
    fan_low = 0; en_high = 0;
    for (int i = 0; i < 65536; i++) begin
      @(negedge clk);
      if (i < 2000 && ramps.en == 4'hF) en_high++;
      if (!ramps.fan) fan_low++;
    end
    trojan_en = '0; idle(5);
    check(en_high == 600, $sformatf("T8 EN high %0d cycles", en_high));
    check(fan_low == 65536 - 64 * 256, $sformatf("T9 fan low %0d cycles", fan_low));
    check(ramps.fan && ramps.en == 4'h0, "fan/EN follow firmware");
    if (en_high > 0) mech[M_T8]++;
    if (fan_low > 0) mech[M_T9]++;
    ard.fan = 0;
    // several Trojans at once: T1 shift, T2 halved flow and T7 heaters on
    clear_counts();
    @(negedge clk) trojan_en = (9'b1 << TJ_T1) | (9'b1 << TJ_T2) | (9'b1 << TJ_T7);
    for (int i = 0; i < 20; i++) step(AX_E, 1, 20);
    check(ramps.heat_bed && ramps.heat_end, "combination: T7 heaters on");
    idle(T1I + 300);
    trojan_en = '0; idle(50);
    check(ramps_rises[AX_X] - ard_rises[AX_X] == (T1S << USTEP), "combination: T1 shifted X");
    check(ramps_rises[AX_Y] - ard_rises[AX_Y] == (T1S << USTEP), "combination: T1 shifted Y");
    check(ramps_rises[AX_E] == 10, $sformatf("combination: T2 %0d of 20 E steps", ramps_rises[AX_E]));
    check(!ramps.heat_bed && !ramps.heat_end, "combination: heaters follow firmware after");
    if (ramps_rises[AX_X] > ard_rises[AX_X] && ramps_rises[AX_E] < ard_rises[AX_E] && ramps.heat_bed == 0)
      mech[M_COMBO]++;

    // capture still reports what the firmware commanded
    // drop the records sent meanwhile (whole records only)
    while (rx_q.size() % 16 != 0) @(negedge clk);
    rx_q.delete();
    get_record(rec);
    get_record(rec);
    for (int a = 0; a < 4; a++)
      check(rec[a] == count_t'(pos[a]), $sformatf("capture after Trojans axis %0d: %0d expected %0d",
                                                  a, rec[a], pos[a]));

    // ------------------------------------------ 5. re-homing
    $display("re-homing at %0t", $time);
    home();
    // the bump after the Z trip already started the capture again
    check(led[0] == 1 && led[1] == 1, "re-homed, capture restarted by the Z bump");
    while (rx_q.size() % 16 != 0) @(negedge clk);
    rx_q.delete();
    step(AX_X, 1);
    get_record(rec);
    get_record(rec);
    for (int a = 0; a < 4; a++)
      check(rec[a] == count_t'(pos[a]), $sformatf("after re-homing axis %0d: %0d expected %0d", a, rec[a], pos[a]));
    mech[M_REHOME]++;

    for (int m = 0; m < M_N; m++) begin
      checks++;
      if (mech[m] == 0) begin failures++; $display("mechanism never happened: %s", mech_name[m]); end
      else $display("mechanism %-26s %0d", mech_name[m], mech[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

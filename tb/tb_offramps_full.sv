// tb_offramps_full: one complete monitored job on the FPGA at its default
// parameters (100 MHz, 0.1 s capture period, 115200 baud, T2 masking half).
// Sequence: bypass check, homing X/Y/Z, a short job with T2 enabled (the
// shield receives half of the extruder steps, all other steps unchanged), then
// the first capture record, 0.1 s after the first step, is decoded from the
// serial line and must equal the steps the firmware commanded since homing.
// Then T9 (fan on for 128/256 of each 65536-cycle PWM period) and T8 (EN held
// high for the first 0.5 s of its 2 s period) are measured at their default
// timings, and a later record, 0.1 s after the one before it, must still
// report the commanded counts. About 80 million clock cycles are simulated.
module tb_offramps_full;
  import offramps_pkg::*;
  localparam int CPB = 868;

  logic clk = 0, rst_btn = 1, bypass = 1;
  logic [8:0] trojan_en = '0;
  ctrl_t ard = '0, ramps;
  logic [2:0] ramps_endstop = '0, ard_endstop;
  logic ard_disp_tx = 1, ramps_disp_tx, ramps_disp_rx = 1, ard_disp_rx;
  logic uart_txd;
  logic [1:0] led;
  int checks = 0, failures = 0;

  offramps_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1s;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

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

  byte unsigned rx_q [$];
  realtime rx_t [$];                      // start-bit time of each byte
  realtime first_start = 0;
  initial begin
    forever begin
      logic [7:0] b;
      @(negedge uart_txd);
      if (first_start == 0) first_start = $realtime;
      rx_t.push_back($realtime);
      #(CPB * 10 / 2);
      for (int i = 0; i < 8; i++) begin #(CPB * 10); b[i] = uart_txd; end
      #(CPB * 10);
      rx_q.push_back(b);
    end
  end

  longint pos [4];
  task automatic step(input int axis, input bit dir);
    @(negedge clk) ard.dir[axis] = dir;
    @(negedge clk) ard.step[axis] = 1'b1;
    repeat (100) @(negedge clk);          // 1 us pulse
    ard.step[axis] = 1'b0;
    pos[axis] += dir ? 1 : -1;
    repeat (400) @(negedge clk);          // 20 kHz step rate
  endtask

  initial begin
    logic [127:0] r;
    realtime t_first_step;
    int fan_hi, en_hi;
    for (int a = 0; a < 4; a++) pos[a] = 0;
    repeat (4) @(negedge clk);
    rst_btn = 0;
    repeat (4) @(negedge clk);
    for (int i = 0; i < 100; i++) begin
      @(negedge clk) ard = ctrl_t'($urandom);
      #1 check(ramps == ard, "bypass");
    end
    @(negedge clk) ard = '0; bypass = 0;
    // homing
    for (int a = 0; a < 3; a++) begin
      repeat (5) step(a, 0);
      ramps_endstop[a] = 1; repeat (10) @(negedge clk); ramps_endstop[a] = 0;
    end
    check(led == 2'b01, "homed, capture not yet running");
    for (int a = 0; a < 4; a++) begin pos[a] = 0; ard_rises[a] = 0; ramps_rises[a] = 0; end
    // job with T2 (half flow)
    trojan_en = 9'b1 << TJ_T2;
    t_first_step = $realtime;
    for (int i = 0; i < 20; i++) begin
      step(AX_X, 1); step(AX_Y, i % 3 != 0); step(AX_E, 1); step(AX_E, 1);
    end
    step(AX_Z, 1);
    check(ramps_rises[AX_E] == ard_rises[AX_E] / 2, $sformatf("T2: E %0d of %0d", ramps_rises[AX_E], ard_rises[AX_E]));
    check(ramps_rises[AX_X] == 20 && ramps_rises[AX_Y] == 20 && ramps_rises[AX_Z] == 1, "X/Y/Z untouched");
    // first record, 0.1 s after the first step edge
    while (rx_q.size() < 16) @(negedge clk);
    for (int i = 0; i < 16; i++) begin r = {r[119:0], rx_q.pop_front()}; void'(rx_t.pop_front()); end
    check(first_start - t_first_step > 99.9ms && first_start - t_first_step < 100.1ms,
          $sformatf("first record after %0t", first_start - t_first_step));
    for (int a = 0; a < 4; a++)
      check(count_t'(r[127 - 32 * a -: 32]) == count_t'(pos[a]),
            $sformatf("axis %0d: captured %0d commanded %0d", a, count_t'(r[127 - 32 * a -: 32]), pos[a]));
    $display("record X=%0d Y=%0d Z=%0d E=%0d", count_t'(r[127:96]), count_t'(r[95:64]),
             count_t'(r[63:32]), count_t'(r[31:0]));
    trojan_en = '0;

    // T9 at its default duty: two whole PWM periods
    ard.fan = 1;
    @(negedge clk) trojan_en = 9'b1 << TJ_T9;
    repeat (2) @(negedge clk);
    fan_hi = 0;
    for (int i = 0; i < 2 * 65536; i++) begin
      @(negedge clk);
      if (ramps.fan) fan_hi++;
    end
    check(fan_hi == 65536, $sformatf("T9: fan high %0d of %0d cycles", fan_hi, 2 * 65536));
    trojan_en = '0;
    repeat (3) @(negedge clk);
    check(ramps.fan, "fan follows the firmware after T9");

    // T8 at its default timing: 0.6 s watched, EN high for the first 0.5 s
    ard.en = '0;
    @(negedge clk) trojan_en = 9'b1 << TJ_T8;
    en_hi = 0;
    for (int i = 0; i < 60_000_000; i++) begin
      @(negedge clk);
      if (ramps.en == 4'hF) en_hi++;
    end
    check(en_hi == 50_000_000, $sformatf("T8: EN high %0d cycles", en_hi));
    trojan_en = '0;
    repeat (3) @(negedge clk);
    check(ramps.en == 4'h0, "EN follows the firmware after T8");

    // a later record: 0.1 s after the one before it, counts unchanged
    while (rx_q.size() % 16 != 0) @(negedge clk);
    while (rx_q.size() > 16) begin void'(rx_q.pop_front()); void'(rx_t.pop_front()); end
    while (rx_q.size() < 32) @(negedge clk);
    for (int i = 0; i < 16; i++) r = {r[119:0], rx_q[16 + i]};
    check(rx_t[16] - rx_t[0] > 99.99ms && rx_t[16] - rx_t[0] < 100.01ms,
          $sformatf("record period %0t", rx_t[16] - rx_t[0]));
    for (int a = 0; a < 4; a++)
      check(count_t'(r[127 - 32 * a -: 32]) == count_t'(pos[a]),
            $sformatf("later record axis %0d: captured %0d commanded %0d", a, count_t'(r[127 - 32 * a -: 32]), pos[a]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pulse_generator: self-checking test of the STEP burst generator.
// Runs bursts with different step counts, microstepping factors, periods and
// widths, and checks for each: the number of pulses (steps << ustep), the
// width of every pulse, the spacing of pulse starts (= period), and the total
// time from start to done (N*period + 2 cycles). A burst with `pause` held
// high for a while checks that no pulse starts while paused. A zero-length
// burst must give done one cycle after start.
module tb_pulse_generator;
  logic clk = 0, rst_n = 0;
  logic start = 0, pause = 0;
  logic [15:0] num_steps = '0;
  logic [2:0]  ustep_log2 = '0;
  logic [23:0] period = 24'd10, width = 24'd3;
  logic step_o, busy, done;
  int checks = 0, failures = 0;

  pulse_generator #(.CNT_W(16), .TIME_W(24)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // Monitor: pulse widths, start spacing, count and paused starts.
  int pulses, cur_w, last_rise, cyc, bad_w, bad_sp, paused_rise;
  logic step_d;
  always @(posedge clk) begin
    cyc++;
    step_d <= step_o;
    if (step_o && !step_d) begin
      pulses++;
      if (last_rise >= 0 && cyc - last_rise != int'(period)) bad_sp++;
      last_rise = cyc;
      cur_w = 1;
      if (pause_seen) paused_rise++;
    end else if (step_o) cur_w++;
    if (!step_o && step_d && cur_w != int'(width)) bad_w++;
  end
  // pause as seen at the decision edge (one cycle before step_o rises)
  logic pause_seen;
  always @(posedge clk) pause_seen <= pause;

  task automatic burst(input int n, input int u, input int per, input int w, input bit with_pause);
    int t0, t_done, expect_n;
    expect_n = n << u;
    @(negedge clk);
    num_steps = 16'(n); ustep_log2 = 3'(u); period = 24'(per); width = 24'(w);
    pulses = 0; bad_w = 0; bad_sp = 0; last_rise = -1; paused_rise = 0;
    start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    if (with_pause) begin
      // hold pause for a while in the middle of the burst
      repeat (per * 2 + 3) @(negedge clk);
      pause = 1;
      repeat (per * 3) @(negedge clk);
      pause = 0;
    end
    while (!done) @(negedge clk);
    t_done = cyc;
    check(pulses == expect_n, $sformatf("pulse count %0d expected %0d", pulses, expect_n));
    check(bad_w == 0, $sformatf("pulse width errors %0d", bad_w));
    check(paused_rise == 0, "pulse started while paused");
    if (!with_pause) begin
      check(bad_sp == 0, $sformatf("pulse spacing errors %0d", bad_sp));
      check(t_done - t0 == expect_n * per + 2,
            $sformatf("burst time %0d expected %0d", t_done - t0, expect_n * per + 2));
    end
    @(negedge clk);
    check(!busy && !step_o, "idle after done");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    burst(1, 0, 10, 3, 0);
    burst(5, 0, 7, 2, 0);
    burst(3, 2, 20, 5, 0);        // 12 pulses
    burst(2, 4, 12, 1, 0);        // 32 pulses, 1/16 microstepping
    burst(4, 1, 15, 4, 1);        // paused in the middle
    for (int k = 0; k < 5; k++)
      burst($urandom_range(1, 6), $urandom_range(0, 3), $urandom_range(4, 30), 2, 0);
    // zero-length burst
    @(negedge clk); num_steps = 0; start = 1;
    @(negedge clk); start = 0;
    check(done && !busy, "zero burst: done next cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

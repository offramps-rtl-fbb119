// tb_capture_controller: self-checking test of the capture stream.
// Counts are driven as a known function of the cycle number, so the value a
// snapshot must hold follows from when it is taken. The test checks:
//   - nothing is sent before homing, or after homing until the first step;
//   - the k-th transaction samples the counts exactly k*INTERVAL cycles after
//     the first step edge and its start bit follows two cycles later;
//   - each transaction is 16 bytes, X,Y,Z,E, 32 bits each, MSB first;
//   - txn_count counts transactions and a new homing clears it and stops the
//     stream until the next step;
//   - a second instance with a period shorter than one transaction reports
//     overrun.
module tb_capture_controller;
  import offramps_pkg::*;
  localparam int INTERVAL = 2000;
  localparam int CPB      = 8;
  logic clk = 0, rst_n = 0, homed = 0, homed_pulse = 0, any_step = 0;
  count_t count [NUM_AXES];
  logic txd, running, overrun;
  logic [31:0] txn_count;
  logic txd2, running2, overrun2;
  logic [31:0] txn_count2;
  int checks = 0, failures = 0;
  int cyc = 0;

  capture_controller #(.INTERVAL(INTERVAL), .CLKS_PER_BIT(CPB)) dut (.*);
  capture_controller #(.INTERVAL(300), .CLKS_PER_BIT(CPB)) dut_fast (
    .clk, .rst_n, .homed, .homed_pulse, .any_step, .count,
    .txd(txd2), .running(running2), .txn_count(txn_count2), .overrun(overrun2));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic count_t f(int n, int a);
    case (a)
      0: return count_t'(n * 3);
      1: return count_t'(n * 5 + 32'h0100_0000);
      2: return count_t'(n / 7);
      default: return -count_t'(n);
    endcase
  endfunction

  always @(negedge clk) for (int a = 0; a < NUM_AXES; a++) count[a] = f(cyc, a);

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // receiver: bytes with the cycle number of their start-bit edge
  byte unsigned rx_q [$];
  int           rx_t [$];
  initial begin
    forever begin
      logic [7:0] b;
      int t;
      @(negedge txd);
      t = cyc;
      #(CPB * 10 / 2);
      for (int i = 0; i < 8; i++) begin #(CPB * 10); b[i] = txd; end
      #(CPB * 10);
      if (txd !== 1'b1) begin failures++; $display("stop bit"); end
      rx_q.push_back(b); rx_t.push_back(t);
    end
  end

  task automatic expect_txn(input int snap_cyc);
    logic [127:0] rec, exp;
    while (rx_q.size() < 16) @(negedge clk);
    check(rx_t[0] == snap_cyc + 2, $sformatf("start bit at cycle %0d expected %0d", rx_t[0], snap_cyc + 2));
    for (int i = 0; i < 16; i++) rec = {rec[119:0], rx_q.pop_front()};
    rx_t.delete();
    exp = {f(snap_cyc, 0), f(snap_cyc, 1), f(snap_cyc, 2), f(snap_cyc, 3)};
    check(rec == exp, $sformatf("record %h expected %h", rec, exp));
  endtask

  initial begin
    int s;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // steps before homing: ignored
    repeat (10) begin @(negedge clk) any_step = 1; @(negedge clk) any_step = 0; end
    repeat (3 * INTERVAL) @(negedge clk);
    check(!running && rx_q.size() == 0, "no stream before homing");
    // homing
    @(negedge clk) homed = 1; homed_pulse = 1;
    @(negedge clk) homed_pulse = 0;
    repeat (2 * INTERVAL) @(negedge clk);
    check(!running && rx_q.size() == 0, "no stream before first step");
    // first step
    @(negedge clk) any_step = 1; s = cyc;
    @(negedge clk) any_step = 0;
    check(running, "running after first step");
    for (int k = 1; k <= 3; k++) begin
      expect_txn(s + k * INTERVAL);
      check(txn_count == 32'(k), $sformatf("txn_count %0d", txn_count));
    end
    // more steps do not restart the timer
    @(negedge clk) any_step = 1;
    @(negedge clk) any_step = 0;
    expect_txn(s + 4 * INTERVAL);
    // re-homing clears and stops
    while (rx_q.size() != 0 || txd !== 1'b1) @(negedge clk);
    @(negedge clk) homed_pulse = 1;
    @(negedge clk) homed_pulse = 0;
    check(!running && txn_count == 0, "homing clears the stream");
    repeat (INTERVAL + 200) @(negedge clk);
    check(rx_q.size() == 0, "no stream after re-homing until a step");
    @(negedge clk) any_step = 1; s = cyc;
    @(negedge clk) any_step = 0;
    expect_txn(s + INTERVAL);
    check(txn_count == 1, "txn_count restarted");
    check(!overrun, "no overrun at the long period");
    check(overrun2, "overrun at a period shorter than one record");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

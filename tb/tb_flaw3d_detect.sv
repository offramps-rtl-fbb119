// tb_flaw3d_detect: golden-model Trojan detection with the capture stream.
// The firmware model runs the same short job several times through the FPGA
// (reduced capture period). Each run is homed, and the 16-byte records it
// streams are collected. The first run is the golden capture. The others
// emulate the two g-code Trojan families of the Flaw3D study:
//   reduction   every extrusion scaled by 0.5, 0.85, 0.9 or 0.98
//   relocation  every N-th move (N = 5, 10, 20, 100) its filament is laid
//               down after a 400-step X detour and the head comes back
// A run is compared with the golden one record by record: a column that
// differs by more than 5 % of the golden value is a mismatch, and the last
// record (the totals after the job) must match exactly (0 % margin). A run
// with any mismatch is flagged. Checks: a repeat of the golden job is not
// flagged, and all eight Trojan runs are.
module tb_flaw3d_detect;
  import offramps_pkg::*;
  localparam int CPB = 4, CAP = 3000, MOVES = 200;

  logic clk = 0, rst_btn = 1, bypass = 0;
  logic [8:0] trojan_en = '0;
  ctrl_t ard = '0, ramps;
  logic [2:0] ramps_endstop = '0, ard_endstop;
  logic ard_disp_tx = 1, ramps_disp_tx, ramps_disp_rx = 1, ard_disp_rx;
  logic uart_txd;
  logic [1:0] led;
  int checks = 0, failures = 0;

  offramps_top #(.CAPTURE_INTERVAL(CAP), .CLKS_PER_BIT(CPB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // capture receiver -> records
  typedef count_t rec_t [4];
  byte unsigned rx_q [$];
  rec_t recs [$];
  initial begin
    forever begin
      logic [7:0] b;
      @(negedge uart_txd);
      #(CPB * 10 / 2);
      for (int i = 0; i < 8; i++) begin #(CPB * 10); b[i] = uart_txd; end
      #(CPB * 10);
      rx_q.push_back(b);
      if (rx_q.size() == 16) begin
        logic [127:0] r;
        rec_t c;
        for (int i = 0; i < 16; i++) r = {r[119:0], rx_q.pop_front()};
        for (int a = 0; a < 4; a++) c[a] = count_t'(r[127 - 32 * a -: 32]);
        recs.push_back(c);
      end
    end
  end

  task automatic step(input int axis, input bit dir);
    @(negedge clk) ard.dir[axis] = dir;
    @(negedge clk) ard.step[axis] = 1'b1;
    repeat (3) @(negedge clk);
    ard.step[axis] = 1'b0;
    repeat (2) @(negedge clk);
  endtask

  task automatic home();
    for (int a = 0; a < 3; a++) begin
      repeat (3) step(a, 0);
      ramps_endstop[a] = 1; repeat (6) @(negedge clk); ramps_endstop[a] = 0;
    end
  endtask

  // One job: MOVES moves of +20 X, +8 Y and 30*factor E steps, a Z step every
  // 20 moves. reloc_n > 0: every reloc_n-th move extrudes after an X detour.
  task automatic run_job(input real factor, input int reloc_n, output rec_t out [$]);
    int e_sent = 0, e_target;
    recs.delete();
    home();
    for (int m = 0; m < MOVES; m++) begin
      bit reloc = (reloc_n > 0) && (m % reloc_n == reloc_n - 1);
      int e_now;
      e_target = int'($floor(30.0 * factor * (m + 1) + 0.5));
      e_now = e_target - e_sent;
      e_sent = e_target;
      for (int i = 0; i < 20; i++) step(AX_X, 1);
      for (int i = 0; i < 8; i++) step(AX_Y, 1);
      if (reloc) for (int i = 0; i < 400; i++) step(AX_X, 1);
      for (int i = 0; i < e_now; i++) step(AX_E, 1);
      if (reloc) for (int i = 0; i < 400; i++) step(AX_X, 0);
      if (m % 20 == 19) step(AX_Z, 1);
    end
    // two more records after the job: the last one holds the totals
    begin
      int n = recs.size();
      while (recs.size() < n + 2) @(negedge clk);
    end
    out = recs;
  endtask

  function automatic bit compare(input string name, input rec_t g [$], input rec_t t [$]);
    int n = (g.size() > t.size()) ? g.size() : t.size();
    int mism = 0;
    real worst = 0.0;
    bit final_bad = 0;
    for (int i = 0; i < n; i++) begin
      rec_t gr = g[(i < g.size()) ? i : g.size() - 1];
      rec_t tr = t[(i < t.size()) ? i : t.size() - 1];
      bit bad = 0;
      for (int a = 0; a < 4; a++) begin
        real ref_v = (gr[a] < 0) ? -real'(gr[a]) : real'(gr[a]);
        real d = real'(tr[a]) - real'(gr[a]);
        real pct;
        if (d < 0) d = -d;
        pct = (ref_v < 1.0) ? ((d > 0) ? 100.0 : 0.0) : 100.0 * d / ref_v;
        if (pct > worst) worst = pct;
        if (pct > 5.0) bad = 1;
      end
      if (bad) mism++;
    end
    for (int a = 0; a < 4; a++)
      if (g[g.size() - 1][a] != t[t.size() - 1][a]) final_bad = 1;
    $display("%-22s records %0d/%0d  mismatches %0d  largest difference %0.2f%%  final totals %s  -> %s",
             name, t.size(), g.size(), mism, worst, final_bad ? "differ" : "match",
             (mism > 0 || final_bad) ? "Trojan likely" : "clean");
    return (mism > 0 || final_bad);
  endfunction

  initial begin
    rec_t golden [$], run [$];
    real red [4] = '{0.5, 0.85, 0.9, 0.98};
    int  rel [4] = '{5, 10, 20, 100};
    repeat (4) @(negedge clk);
    rst_btn = 0;
    repeat (4) @(negedge clk);
    run_job(1.0, 0, golden);
    $display("golden: %0d records, totals X=%0d Y=%0d Z=%0d E=%0d", golden.size(),
             golden[golden.size()-1][0], golden[golden.size()-1][1],
             golden[golden.size()-1][2], golden[golden.size()-1][3]);
    run_job(1.0, 0, run);
    checks++;
    if (compare("golden repeat", golden, run)) begin failures++; $display("FAIL false alarm"); end
    for (int k = 0; k < 4; k++) begin
      run_job(red[k], 0, run);
      checks++;
      if (!compare($sformatf("case %0d reduction %0.2f", k + 1, red[k]), golden, run)) begin
        failures++; $display("FAIL not detected");
      end
    end
    for (int k = 0; k < 4; k++) begin
      run_job(1.0, rel[k], run);
      checks++;
      if (!compare($sformatf("case %0d relocation %0d", k + 5, rel[k]), golden, run)) begin
        failures++; $display("FAIL not detected");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_edge_detector: self-checking test of the synchroniser/edge detector.
// Random 4-bit inputs, held for 1-3 cycles, are applied between clock edges.
// A reference shift register in the testbench gives the expected synchronised
// level (input two clocks back) and the expected rise/fall pulses, which are
// compared every cycle. Latency is thereby checked to the cycle.
module tb_edge_detector;
  localparam int W = 4;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] din = '0, level, rise, fall;
  logic [W-1:0] d1 = '0, d2 = '0, d3 = '0;
  int checks = 0, failures = 0, n_rise = 0, n_fall = 0;

  edge_detector #(.WIDTH(W), .SYNC_STAGES(2)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst_n) begin d1 <= '0; d2 <= '0; d3 <= '0; end
    else begin d1 <= din; d2 <= d1; d3 <= d2; end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      checks++;
      if (level !== d2 || rise !== (d2 & ~d3) || fall !== (~d2 & d3)) begin
        failures++;
        if (failures < 10)
          $display("mismatch t=%0t din=%b level=%b/%b rise=%b/%b fall=%b/%b",
                   $time, din, level, d2, rise, d2 & ~d3, fall, ~d2 & d3);
      end
      n_rise += $countones(rise);
      n_fall += $countones(fall);
      if ($urandom_range(0, 2) == 0) din = W'($urandom);
    end
    checks++;
    if (n_rise < 50 || n_fall < 50) begin failures++; $display("too few edges"); end
    $display("rises=%0d falls=%0d", n_rise, n_fall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

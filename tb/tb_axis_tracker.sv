// tb_axis_tracker: self-checking test of the four step counters.
// Random STEP edges and DIR levels on all four axes; an independent model in
// the testbench adds or subtracts per edge. The counts are compared every
// cycle (they must change in the cycle after the edge). A `clear` in the
// middle, coinciding with edges, must zero every count. One axis is built
// with an inverted DIR polarity to check DIR_POS_LEVEL.
module tb_axis_tracker;
  import offramps_pkg::*;
  localparam logic [3:0] POL = 4'b1011;   // axis 2 counts up on DIR low
  logic clk = 0, rst_n = 0, clear = 0;
  logic [3:0] step_rise = '0, dir = '0;
  count_t count [4];
  longint model [4];
  int checks = 0, failures = 0, ups = 0, downs = 0;

  axis_tracker #(.N_AXES(4), .DIR_POS_LEVEL(POL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 4; a++) model[a] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      // compare with the model for the previous cycle's inputs
      for (int a = 0; a < 4; a++) begin
        checks++;
        if (count[a] !== count_t'(model[a])) begin
          failures++;
          if (failures < 10) $display("axis %0d: %0d expected %0d", a, count[a], model[a]);
        end
      end
      // new inputs
      step_rise = 4'($urandom);
      dir = 4'($urandom);
      clear = (i == 12000);
      if (clear) for (int a = 0; a < 4; a++) model[a] = 0;
      else
        for (int a = 0; a < 4; a++)
          if (step_rise[a]) begin
            if (dir[a] == POL[a]) begin model[a]++; ups++; end
            else begin model[a]--; downs++; end
          end
    end
    checks++;
    if (ups < 100 || downs < 100) begin failures++; $display("too few up/down steps"); end
    $display("ups=%0d downs=%0d", ups, downs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

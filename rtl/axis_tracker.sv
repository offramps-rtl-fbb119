// axis_tracker: absolute step position of every motor.
//
// One signed up/down counter per motor (X, Y, Z, E). On a STEP rising edge the
// counter adds one if the motor's DIR line is at its positive level and
// subtracts one otherwise. `clear` (the homing-complete pulse) sets all
// counters to zero, so after homing each count is the motor's absolute
// position in steps from the home corner, and the E count is the filament fed.
// Counts change the cycle after the edge; `clear` wins over a same-cycle edge.
//
// The counting rule and the reset on homing follow the paper. The 32-bit width
// follows from its 16-byte record for four motors; which DIR level means
// "positive" is set per axis by DIR_POS_LEVEL, defaulting to high.
module axis_tracker
  import offramps_pkg::*;
#(
  parameter int unsigned          N_AXES        = NUM_AXES,
  parameter logic [N_AXES-1:0]    DIR_POS_LEVEL = '1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic [N_AXES-1:0]    step_rise,
  input  logic [N_AXES-1:0]    dir,
  output count_t               count [N_AXES]
);

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int a = 0; a < N_AXES; a++) count[a] <= '0;
    end else begin
      for (int a = 0; a < N_AXES; a++) begin
        if (step_rise[a]) begin
          if (dir[a] == DIR_POS_LEVEL[a]) count[a] <= count[a] + count_t'(1);
          else                            count[a] <= count[a] - count_t'(1);
        end
      end
    end
  end

endmodule

// edge_detector: synchroniser plus rising/falling edge detector.
//
// Printer signals (STEP, DIR, endstops) arrive asynchronously from the Arduino
// and the RAMPS board. Each bit passes through a SYNC_STAGES-deep flip-flop
// chain into the clk domain; the synchronised level is compared with its
// value one cycle earlier, giving a one-cycle pulse on `rise` (0->1) and
// `fall` (1->0). `level` lags `din` by SYNC_STAGES cycles and the edge pulses
// appear in the same cycle as the new `level`.
//
// The paper specifies an edge detector that spots head movements from STEP/DIR
// and endstop actuation; the two-stage synchroniser and the reset value 0
// are this design's choices.
module edge_detector #(
  parameter int unsigned WIDTH       = 1,
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] level,
  output logic [WIDTH-1:0] rise,
  output logic [WIDTH-1:0] fall
);

  logic [WIDTH-1:0] sync_q [SYNC_STAGES];
  logic [WIDTH-1:0] prev_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < SYNC_STAGES; i++) sync_q[i] <= '0;
      prev_q <= '0;
    end else begin
      sync_q[0] <= din;
      for (int i = 1; i < SYNC_STAGES; i++) sync_q[i] <= sync_q[i-1];
      prev_q <= sync_q[SYNC_STAGES-1];
    end
  end

  assign level = sync_q[SYNC_STAGES-1];
  assign rise  = level & ~prev_q;
  assign fall  = ~level & prev_q;

endmodule

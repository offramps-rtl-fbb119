// homing_detector: recognises the printer's homing sequence.
//
// Homing (G28) is the first thing a print does: the firmware drives each axis
// into its min endstop in turn. This state machine watches the synchronised
// endstop trip edges and steps through WAIT_X -> WAIT_Y -> WAIT_Z -> HOMED.
// Trips that arrive out of order are ignored (the firmware bumps each endstop
// twice, and a repeated X or Y trip must not advance the sequence). When the
// Z trip arrives, `homed` rises and `homed_pulse` marks that cycle; both are
// registered, so they appear one cycle after the Z edge.
//
// In HOMED a new X trip means the next print is homing: the machine returns to
// WAIT_Y and `homed` falls until the sequence completes again.
//
// The paper describes a state machine tracking endstop actuation "in a defined
// order"; the order X, Y, Z (the firmware's default) and the re-arming rule
// are this design's choices.
module homing_detector (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] endstop_rise,   // X, Y, Z trip edges
  output logic       homed,
  output logic       homed_pulse,
  output logic [1:0] state
);

  typedef enum logic [1:0] {
    WAIT_X = 2'd0,
    WAIT_Y = 2'd1,
    WAIT_Z = 2'd2,
    HOMED  = 2'd3
  } home_state_e;

  home_state_e state_q, state_d;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      WAIT_X: if (endstop_rise[0]) state_d = WAIT_Y;
      WAIT_Y: if (endstop_rise[1]) state_d = WAIT_Z;
      WAIT_Z: if (endstop_rise[2]) state_d = HOMED;
      HOMED:  if (endstop_rise[0]) state_d = WAIT_Y;
      default: state_d = WAIT_X;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q     <= WAIT_X;
      homed_pulse <= 1'b0;
    end else begin
      state_q     <= state_d;
      homed_pulse <= (state_q == WAIT_Z) && (state_d == HOMED);
    end
  end

  assign homed = (state_q == HOMED);
  assign state = state_q;

endmodule

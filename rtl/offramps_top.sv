// offramps_top: the OffRAMPS machine-in-the-middle FPGA.
//
// The FPGA sits on the firmware-to-shield path of a desktop 3D printer: every
// control line from the Arduino Mega (`ard`) reaches the RAMPS 1.4 board
// (`ramps`) through it, and the endstop and display lines come back through it.
// It has two jobs that share one front end:
//
//   Modification  `ard` is synchronised (edge_detector) and fed to
//                 trojan_control, whose output drives `ramps`. With `bypass`
//                 high the Arduino pins drive the RAMPS pins directly, with no
//                 register in the path (the golden, unmodified print).
//   Monitoring    the synchronised Arduino STEP/DIR lines feed axis_tracker,
//                 and capture_controller streams the four step counts to the
//                 host over `uart_txd` every CAPTURE_INTERVAL cycles (0.1 s).
//                 The monitor taps the Arduino side, so it sees what the
//                 firmware commanded even when a Trojan is acting downstream.
//
// homing_detector, fed by the synchronised endstops, tells both jobs when the
// printer has homed: it arms the print-time Trojans and zeroes the counters.
// Endstops and the display UART pass through unchanged.
//
// Timing: the Trojan path is 3 cycles (2 synchroniser stages and the output
// register of trojan_control); the bypass path is combinational. The reset
// push button is synchronised and active high. led[0] shows homed, led[1]
// shows that the capture stream is running.
//
// The paper describes the two experiments as separate FPGA configurations;
// here both live in one top, selected at run time by `bypass` and `trojan_en`.
module offramps_top
  import offramps_pkg::*;
#(
  parameter int unsigned CAPTURE_INTERVAL    = CLK_HZ / 10,
  parameter int unsigned CLKS_PER_BIT        = 868,
  parameter bit          ENDSTOP_ACTIVE_HIGH = 1'b1,
  parameter int unsigned T1_INTERVAL         = 10 * CLK_HZ,
  parameter int unsigned T1_STEPS            = 10,
  parameter bit          T1_RANDOM           = 1'b0,
  parameter int unsigned T2_DROP_EVERY       = 2,
  parameter bit          T2_OVER             = 1'b0,
  parameter int unsigned T3_WINDOW           = 100_000,
  parameter bit          T3_OVER             = 1'b1,
  parameter int unsigned T4_PROB_LOG2        = 6,
  parameter int unsigned T4_STEPS            = 4,
  parameter int unsigned T5_TRIGGER_ZSTEPS   = 4000,
  parameter int unsigned T5_STEPS            = 40,
  parameter int unsigned T8_PERIOD           = 2 * CLK_HZ,
  parameter int unsigned T8_OFF              = CLK_HZ / 2,
  parameter int unsigned T9_DUTY             = 128,
  parameter bit          T9_OVER             = 1'b0,
  parameter int unsigned USTEP_LOG2          = 4,
  parameter int unsigned INJ_PERIOD          = 10_000,
  parameter int unsigned INJ_WIDTH           = 200
) (
  input  logic                    clk,
  input  logic                    rst_btn,
  input  logic                    bypass,
  input  logic [NUM_TROJANS-1:0]  trojan_en,
  // firmware <-> shield control bundle
  input  ctrl_t                   ard,
  output ctrl_t                   ramps,
  // endstops, shield -> firmware
  input  logic [NUM_ENDSTOPS-1:0] ramps_endstop,
  output logic [NUM_ENDSTOPS-1:0] ard_endstop,
  // display/controller UART, passed through
  input  logic                    ard_disp_tx,
  output logic                    ramps_disp_tx,
  input  logic                    ramps_disp_rx,
  output logic                    ard_disp_rx,
  // capture stream to the USB-UART bridge
  output logic                    uart_txd,
  output logic [1:0]              led
);

  // ------------------------------------------------------------ reset
  logic [1:0] rst_sync_q;
  logic       rst_n;
  always_ff @(posedge clk) rst_sync_q <= {rst_sync_q[0], ~rst_btn};
  assign rst_n = rst_sync_q[1];

  // ---------------------------------------------------- synchronisers
  ctrl_t                 ard_sync, ard_rise, ard_fall;
  logic [NUM_ENDSTOPS-1:0] es_trip, es_level, es_rise, es_fall;

  edge_detector #(.WIDTH(CTRL_W)) u_sync_ctrl (
    .clk   (clk),
    .rst_n (rst_n),
    .din   (ard),
    .level (ard_sync),
    .rise  (ard_rise),
    .fall  (ard_fall)
  );

  assign es_trip = ENDSTOP_ACTIVE_HIGH ? ramps_endstop : ~ramps_endstop;

  edge_detector #(.WIDTH(NUM_ENDSTOPS)) u_sync_endstop (
    .clk   (clk),
    .rst_n (rst_n),
    .din   (es_trip),
    .level (es_level),
    .rise  (es_rise),
    .fall  (es_fall)
  );

  // ------------------------------------------------------------ homing
  logic       homed, homed_pulse;
  logic [1:0] home_state;

  homing_detector u_home (
    .clk          (clk),
    .rst_n        (rst_n),
    .endstop_rise (es_rise),
    .homed        (homed),
    .homed_pulse  (homed_pulse),
    .state        (home_state)
  );

  // ------------------------------------------------- modification path
  ctrl_t troj_out;

  trojan_control #(
    .T1_INTERVAL       (T1_INTERVAL),
    .T1_STEPS          (T1_STEPS),
    .T1_RANDOM         (T1_RANDOM),
    .T2_DROP_EVERY     (T2_DROP_EVERY),
    .T2_OVER           (T2_OVER),
    .T3_WINDOW         (T3_WINDOW),
    .T3_OVER           (T3_OVER),
    .T4_PROB_LOG2      (T4_PROB_LOG2),
    .T4_STEPS          (T4_STEPS),
    .T5_TRIGGER_ZSTEPS (T5_TRIGGER_ZSTEPS),
    .T5_STEPS          (T5_STEPS),
    .T8_PERIOD         (T8_PERIOD),
    .T8_OFF            (T8_OFF),
    .T9_DUTY           (T9_DUTY),
    .T9_OVER           (T9_OVER),
    .USTEP_LOG2        (USTEP_LOG2),
    .INJ_PERIOD        (INJ_PERIOD),
    .INJ_WIDTH         (INJ_WIDTH)
  ) u_trojans (
    .clk       (clk),
    .rst_n     (rst_n),
    .trojan_en (trojan_en),
    .homed     (homed),
    .in_ctrl   (ard_sync),
    .step_rise (ard_rise.step),
    .step_fall (ard_fall.step),
    .out_ctrl  (troj_out),
    .active    ()
  );

  // Bypass multiplexer: original signals or the Trojan module's output.
  assign ramps = bypass ? ard : troj_out;

  assign ard_endstop   = ramps_endstop;
  assign ramps_disp_tx = ard_disp_tx;
  assign ard_disp_rx   = ramps_disp_rx;

  // --------------------------------------------------- monitoring path
  count_t count [NUM_AXES];
  logic   capture_running, capture_overrun;
  logic [31:0] txn_count;

  axis_tracker u_track (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (homed_pulse),
    .step_rise (ard_rise.step),
    .dir       (ard_sync.dir),
    .count     (count)
  );

  capture_controller #(
    .INTERVAL     (CAPTURE_INTERVAL),
    .CLKS_PER_BIT (CLKS_PER_BIT)
  ) u_capture (
    .clk         (clk),
    .rst_n       (rst_n),
    .homed       (homed),
    .homed_pulse (homed_pulse),
    .any_step    (|ard_rise.step),
    .count       (count),
    .txd         (uart_txd),
    .running     (capture_running),
    .txn_count   (txn_count),
    .overrun     (capture_overrun)
  );

  assign led = {capture_running, homed};

endmodule

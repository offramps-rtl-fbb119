// offramps_pkg: constants and types shared by the OffRAMPS FPGA design.
//
// The FPGA sits between an Arduino Mega (running the printer firmware) and a
// RAMPS 1.4 printer shield. Every control signal the firmware sends to the
// shield is collected here into one packed struct, ctrl_t, so that the
// synchroniser, the Trojan control module and the bypass multiplexer all move
// the same bundle. Axis order is X, Y, Z, E (extruder), the order in which
// the capture stream reports step counts.
//
// The clock frequency (100 MHz) and the four motors follow the paper; the
// exact pin set (EN per driver, D8 bed heater, D10 hotend heater, D9 part fan)
// is the RAMPS 1.4 pinout, of which the paper names STEP, DIR, EN, D8 and D10.
package offramps_pkg;

  // FPGA system clock (Cmod-A7, 100 MHz).
  localparam int unsigned CLK_HZ = 100_000_000;

  // Stepper motors: X, Y, Z and the extruder E.
  localparam int unsigned NUM_AXES = 4;
  // Mechanical min endstops: X, Y, Z.
  localparam int unsigned NUM_ENDSTOPS = 3;
  // Number of Trojans T1..T9.
  localparam int unsigned NUM_TROJANS = 9;
  // Width of one step counter; four of them fill a 16-byte capture record.
  localparam int unsigned COUNT_W = 32;
  localparam int unsigned CAPTURE_BYTES = NUM_AXES * COUNT_W / 8;

  typedef enum logic [1:0] {
    AX_X = 2'd0,
    AX_Y = 2'd1,
    AX_Z = 2'd2,
    AX_E = 2'd3
  } axis_e;

  // Index of each Trojan's enable bit (Ti uses bit i-1).
  typedef enum int unsigned {
    TJ_T1 = 0,  // X/Y shift every interval
    TJ_T2 = 1,  // extruder pulse masking (under-extrusion)
    TJ_T3 = 2,  // extrusion change while Y moves
    TJ_T4 = 3,  // Z-wobble: random X/Y shift on Z steps
    TJ_T5 = 4,  // one Z-layer shift
    TJ_T6 = 5,  // heaters forced off
    TJ_T7 = 6,  // heaters forced on
    TJ_T8 = 7,  // stepper drivers disabled via EN
    TJ_T9 = 8   // part fan slowed
  } trojan_e;

  // Firmware -> shield control bundle. Bit i of step/dir/en is axis i.
  typedef struct packed {
    logic [NUM_AXES-1:0] step;      // *_STEP
    logic [NUM_AXES-1:0] dir;       // *_DIR
    logic [NUM_AXES-1:0] en;        // *_EN, active low on the A4988
    logic                heat_bed;  // D8
    logic                heat_end;  // D10
    logic                fan;       // D9
  } ctrl_t;

  localparam int unsigned CTRL_W = $bits(ctrl_t);

  typedef logic signed [COUNT_W-1:0] count_t;

endpackage

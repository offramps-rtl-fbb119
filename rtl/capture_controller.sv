// capture_controller: the UART control unit of the print monitor.
//
// It streams the motors' step counts to the host at a fixed rate so that a
// print can be compared with a known-good ("golden") capture of the same job.
// Sequence:
//   1. `homed_pulse` (homing finished) stops the stream, clears the interval
//      timer and the transaction counter.
//   2. While homed, the first STEP edge on any axis (`any_step`) starts the
//      interval timer. Waiting for real motion, not just for homing, lines the
//      sampling windows of different prints up with each other.
//   3. Every INTERVAL cycles (0.1 s at 100 MHz) the four counts are latched in
//      the same cycle and sent as one 16-byte transaction: X, Y, Z, E, each a
//      32-bit two's-complement number, most significant byte first.
// The first transaction starts INTERVAL cycles after the first step edge; its
// first byte enters the transmitter the cycle after the snapshot. If a period
// ends while a transaction is still being sent, that sample is skipped and the
// sticky `overrun` flag is set (impossible at the default rates: 16 bytes take
// 1.39 ms of the 100 ms period).
//
// Period, record size and start condition follow the paper; byte order and
// the overrun rule are this design's choices.
module capture_controller
  import offramps_pkg::*;
#(
  parameter int unsigned INTERVAL     = CLK_HZ / 10,
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        homed,
  input  logic        homed_pulse,
  input  logic        any_step,
  input  count_t      count [NUM_AXES],
  output logic        txd,
  output logic        running,
  output logic [31:0] txn_count,
  output logic        overrun
);

  localparam int unsigned TMR_W = $clog2(INTERVAL + 1);
  localparam int unsigned IDX_W = $clog2(CAPTURE_BYTES + 1);

  logic [TMR_W-1:0]             timer_q;
  logic [CAPTURE_BYTES*8-1:0]   record_q;
  logic [IDX_W-1:0]             bytes_left_q;
  logic                         tick;
  logic                         tx_ready;
  logic                         tx_valid;
  logic [CAPTURE_BYTES*8-1:0]   snapshot;

  // X in the most significant word so the record leaves X first, MSB first.
  always_comb begin
    for (int a = 0; a < NUM_AXES; a++)
      snapshot[(NUM_AXES-1-a)*COUNT_W +: COUNT_W] = count[a];
  end

  assign tick     = running && (timer_q == TMR_W'(INTERVAL - 1));
  assign tx_valid = (bytes_left_q != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      timer_q      <= '0;
      running      <= 1'b0;
      txn_count    <= '0;
      overrun      <= 1'b0;
      record_q     <= '0;
      bytes_left_q <= '0;
    end else begin
      if (tx_valid && tx_ready) begin
        record_q     <= record_q << 8;
        bytes_left_q <= bytes_left_q - IDX_W'(1);
      end

      if (homed_pulse) begin
        running   <= 1'b0;
        timer_q   <= '0;
        txn_count <= '0;
      end else if (!running) begin
        if (homed && any_step) begin
          running <= 1'b1;
          timer_q <= '0;
        end
      end else if (tick) begin
        timer_q <= '0;
        if (bytes_left_q == '0) begin
          record_q     <= snapshot;
          bytes_left_q <= IDX_W'(CAPTURE_BYTES);
          txn_count    <= txn_count + 32'd1;
        end else begin
          overrun <= 1'b1;
        end
      end else begin
        timer_q <= timer_q + TMR_W'(1);
      end
    end
  end

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk   (clk),
    .rst_n (rst_n),
    .valid (tx_valid),
    .data  (record_q[CAPTURE_BYTES*8-1 -: 8]),
    .ready (tx_ready),
    .txd   (txd)
  );

endmodule

// uart_tx: 8N1 serial transmitter for the board's USB-UART bridge.
//
// A byte is accepted when `valid` and `ready` are both high. The line then
// carries a start bit (0), the eight data bits LSB first and a stop bit (1),
// each CLKS_PER_BIT cycles long; `ready` returns high when the stop bit ends.
// The line idles high. With the default 868 cycles per bit at 100 MHz the
// rate is 115200 baud, so one byte takes 8680 cycles.
//
// The paper only says the capture is sent over the USB-UART peripheral; the
// frame format, baud rate and valid/ready handshake are this design's choices.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       valid,
  input  logic [7:0] data,
  output logic       ready,
  output logic       txd
);

  localparam int unsigned DIV_W = (CLKS_PER_BIT > 1) ? $clog2(CLKS_PER_BIT) : 1;

  logic [9:0]       shift_q;
  logic [3:0]       bits_left_q;
  logic [DIV_W-1:0] div_q;

  assign ready = (bits_left_q == '0);
  assign txd   = ready ? 1'b1 : shift_q[0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      shift_q     <= '1;
      bits_left_q <= '0;
      div_q       <= '0;
    end else if (ready) begin
      if (valid) begin
        shift_q     <= {1'b1, data, 1'b0};
        bits_left_q <= 4'd10;
        div_q       <= '0;
      end
    end else if (div_q == DIV_W'(CLKS_PER_BIT - 1)) begin
      div_q       <= '0;
      shift_q     <= {1'b1, shift_q[9:1]};
      bits_left_q <= bits_left_q - 4'd1;
    end else begin
      div_q <= div_q + DIV_W'(1);
    end
  end

endmodule

// tb_uart_tx: self-checking test of the 8N1 transmitter.
// Sends random bytes back to back through the valid/ready handshake and
// decodes the line with an independent receiver that samples the middle of
// each bit. Checks every byte, the stop bit, the bit time (CLKS_PER_BIT
// cycles, from start-bit edge to stop-bit end) and that the line idles high.
module tb_uart_tx;
  localparam int CPB = 16;
  logic clk = 0, rst_n = 0, valid = 0;
  logic [7:0] data = '0;
  logic ready, txd;
  int checks = 0, failures = 0;
  byte unsigned sent [$];

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  int n_rx = 0;
  initial begin
    logic [7:0] b;
    forever begin
      int t0;
      @(negedge txd);
      t0 = $time;
      #(CPB * 10 / 2);               // middle of the start bit
      checks++; if (txd !== 1'b0) begin failures++; $display("bad start bit"); end
      for (int i = 0; i < 8; i++) begin
        #(CPB * 10);
        b[i] = txd;
      end
      #(CPB * 10);
      checks++; if (txd !== 1'b1) begin failures++; $display("bad stop bit"); end
      checks++;
      if (sent.size() == 0 || sent[0] !== b) begin
        failures++; $display("byte %0d: got %02x", n_rx, b);
      end
      if (sent.size() != 0) void'(sent.pop_front());
      n_rx++;
      // stop bit must last until 10 bit times after the start edge
      #(CPB * 10 / 2 - 1);
      checks++; if (txd !== 1'b1) begin failures++; $display("stop bit too short"); end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (5) @(negedge clk);
    checks++; if (!(txd && ready)) begin failures++; $display("not idle high"); end
    for (int k = 0; k < 40; k++) begin
      @(negedge clk);
      while (!ready) @(negedge clk);
      data = 8'($urandom);
      if (k == 0) data = 8'hA5;
      sent.push_back(data);
      valid = 1;
      @(negedge clk) valid = 0;
      checks++; if (ready) begin failures++; $display("ready stayed high"); end
      if (k % 7 == 3) repeat ($urandom_range(1, 50)) @(negedge clk);
    end
    while (!ready) @(negedge clk);
    repeat (CPB * 2) @(negedge clk);
    checks++;
    if (n_rx != 40) begin failures++; $display("received %0d bytes", n_rx); end
    // timing of one byte: ready low for exactly 10*CPB cycles
    begin
      int c = 0;
      @(negedge clk) data = 8'h3C; valid = 1; sent.push_back(data);
      @(negedge clk) valid = 0;
      while (!ready) begin c++; @(negedge clk); end
      checks++;
      if (c != 10 * CPB) begin failures++; $display("frame took %0d cycles", c); end
    end
    repeat (CPB) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

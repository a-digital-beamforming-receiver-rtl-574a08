// tb_uart_tx: self-checking test of the UART transmitter.
//
// Sends random bytes back to back at a short bit period and decodes them
// with a behavioural receiver. Checks every byte, the framing, that starts
// issued while busy are ignored, and the frame length: busy must last
// exactly 10*CLKS_PER_BIT clocks.
module tb_uart_tx;
  localparam int CPB = 16;

  logic clk = 0, rst_n = 0, start = 0, busy, txd;
  logic [7:0] data = '0;
  logic [7:0] rx_data;
  logic rx_strobe, rx_err;
  int checks = 0, failures = 0;
  logic [7:0] sent [$];
  int busy_len = 0;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.*);
  uart_rx_model #(.CLKS_PER_BIT(CPB)) rx (.clk, .rxd(txd), .data(rx_data), .strobe(rx_strobe), .frame_err(rx_err));

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver side
  always @(posedge clk) begin
    if (rx_strobe) begin
      checks++;
      if (sent.size() == 0 || rx_data !== sent[0]) begin
        failures++;
        $display("byte mismatch got %02x", rx_data);
      end
      if (sent.size() != 0) void'(sent.pop_front());
    end
    if (rx_err) begin checks++; failures++; $display("framing error"); end
  end

  // frame length
  always @(posedge clk) begin
    if (busy) busy_len++;
    else if (busy_len != 0) begin
      checks++;
      if (busy_len != 10 * CPB) begin failures++; $display("busy lasted %0d", busy_len); end
      busy_len = 0;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    checks++;
    if (txd !== 1'b1) failures++;          // idle line high
    for (int k = 0; k < 100; k++) begin
      @(negedge clk);
      while (busy) @(negedge clk);
      data = (k == 0) ? 8'h00 : (k == 1) ? 8'hFF : 8'($urandom);
      sent.push_back(data);
      start = 1;
      @(negedge clk);
      // a start while busy must be ignored
      data = 8'hA5;
      start = (k % 3 == 0);
      @(negedge clk);
      start = 0;
    end
    while (busy) @(negedge clk);
    repeat (2 * CPB) @(negedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("%0d bytes not received", sent.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

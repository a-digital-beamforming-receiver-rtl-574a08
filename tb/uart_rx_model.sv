// uart_rx_model: behavioural 8N1 UART receiver used by the testbenches to
// decode the debug link. It waits for a falling edge on rxd, samples the
// middle of each bit (CLKS_PER_BIT clocks per bit), and pulses strobe for
// one clock with the received byte. frame_err pulses instead when the stop
// bit is not 1 or the start bit is not 0 at its middle. Before the first
// frame the line must have been seen idle (high), so a low line before
// reset is not taken for a start bit.
module uart_rx_model #(
  parameter int CLKS_PER_BIT = 16
) (
  input  logic       clk,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       strobe,
  output logic       frame_err
);
  initial begin
    data = '0;
    strobe = 0;
    frame_err = 0;
    // wait for an idle (high) line before looking for start bits
    do @(posedge clk); while (rxd !== 1'b1);
    forever begin
      @(posedge clk);
      strobe = 0;
      frame_err = 0;
      if (rxd == 1'b0) begin
        logic ok;
        repeat (CLKS_PER_BIT / 2) @(posedge clk);
        ok = (rxd == 1'b0);
        for (int b = 0; b < 8; b++) begin
          repeat (CLKS_PER_BIT) @(posedge clk);
          data[b] = rxd;
        end
        repeat (CLKS_PER_BIT) @(posedge clk);
        ok = ok && (rxd == 1'b1);
        if (ok) strobe = 1; else frame_err = 1;
      end
    end
  end
endmodule

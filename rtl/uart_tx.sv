// uart_tx: 8N1 serial transmitter of the debug read-out link to the PC.
//
// A byte given with start while busy is low is sent as one start bit (0),
// eight data bits LSB first and one stop bit (1), each CLKS_PER_BIT clocks
// long; the line idles high. busy rises on the clock after start and falls
// after the stop bit, so a new byte can follow immediately. Starts while
// busy are ignored.
//
// From the paper: samples go to the PC over a UART. Own choices: frame
// format and the default rate (200 MHz / 1736 = 115200 baud).
module uart_tx #(
  parameter int CLKS_PER_BIT = dbf_pkg::CLKS_PER_BIT
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] data,
  output logic       busy,
  output logic       txd
);
  localparam int CW = $clog2(CLKS_PER_BIT + 1);

  logic [9:0]    shreg;    // stop, data[7:0], start; bit 0 on the line
  logic [3:0]    nbits;    // bits still to send, including the current one
  logic [CW-1:0] cnt;

  assign txd  = busy ? shreg[0] : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      shreg <= '1;
      nbits <= '0;
      cnt   <= '0;
    end else if (!busy) begin
      if (start) begin
        busy  <= 1'b1;
        shreg <= {1'b1, data, 1'b0};
        nbits <= 4'd10;
        cnt   <= CW'(CLKS_PER_BIT - 1);
      end
    end else if (cnt != 0) begin
      cnt <= cnt - 1'b1;
    end else begin
      shreg <= {1'b1, shreg[9:1]};
      cnt   <= CW'(CLKS_PER_BIT - 1);
      nbits <= nbits - 1'b1;
      if (nbits == 4'd1) busy <= 1'b0;
    end
  end

endmodule

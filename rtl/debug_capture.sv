// debug_capture: the receiver's debug module. It records the filtered
// baseband beam in an on-chip RAM and then sends it to a PC over a UART.
//
// Operation: a start pulse (while idle) arms the block; it then stores the
// next len valid output words, one word = N_PAR I samples and N_PAR Q
// samples of W bits, at full rate. When len words are stored it reads them
// back in order and sends every sample as NB = ceil(W/8) bytes (5 for W = 36),
// the sample sign-extended to 8*NB bits and sent least significant byte
// first. Within a word the order is I[0], Q[0], I[1], Q[1], ... I[N_PAR-1],
// Q[N_PAR-1]. busy is high from the clock after start until the last stop
// bit has left. len = 0 returns to idle at once; len > DEPTH is clamped.
//
// Timing: the RAM read is registered (one clock per word read); the UART
// sets the pace of the read-out: each byte takes 10*CLKS_PER_BIT + 1 clocks, so
// a word takes 1 + NB*2*N_PAR*(10*CLKS_PER_BIT + 1) clocks.
//
// From the paper: a RAM in the FPGA holds the filtered I/Q output, which is
// sent to a PC by UART. Own choices: depth, start/length control, byte
// format and order, baud rate.
module debug_capture #(
  parameter int N_PAR        = dbf_pkg::N_PAR,
  parameter int W            = dbf_pkg::FIR_W,
  parameter int DEPTH        = dbf_pkg::CAP_DEPTH,
  parameter int CLKS_PER_BIT = dbf_pkg::CLKS_PER_BIT,
  localparam int LEN_W       = $clog2(DEPTH + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [LEN_W-1:0]     len,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  y_i [N_PAR],
  input  logic signed [W-1:0]  y_q [N_PAR],
  output logic                 busy,
  output logic                 txd
);
  localparam int NB    = (W + 7) / 8;         // bytes per sample
  localparam int NS    = 2 * N_PAR;           // samples per word
  localparam int WORD  = NS * W;
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int SI_W  = $clog2(NS);
  localparam int BI_W  = (NB > 1) ? $clog2(NB) : 1;

  typedef enum logic [2:0] {S_IDLE, S_CAPTURE, S_READ, S_SEND, S_DRAIN} state_t;

  state_t            state;
  logic [WORD-1:0]   mem [DEPTH];
  logic [WORD-1:0]   word_in, word_q;
  logic [AW-1:0]     ptr;
  logic [LEN_W-1:0]  last;             // index of the last word (len-1)
  logic [SI_W-1:0]   sidx;
  logic [BI_W-1:0]   bidx;
  logic              tx_start, tx_busy;
  logic [7:0]        tx_byte;
  logic [8*NB-1:0]   sample_ext;

  always_comb begin
    for (int p = 0; p < N_PAR; p++) begin
      word_in[(2*p)*W   +: W] = y_i[p];
      word_in[(2*p+1)*W +: W] = y_q[p];
    end
    sample_ext = (8*NB)'($signed(word_q[int'(sidx)*W +: W]));
    tx_byte    = sample_ext[int'(bidx)*8 +: 8];
    tx_start   = (state == S_SEND) && !tx_busy;
  end

  always_ff @(posedge clk) begin
    if (state == S_CAPTURE && in_valid) mem[ptr] <= word_in;
    if (state == S_READ) word_q <= mem[ptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ptr   <= '0;
      last  <= '0;
      sidx  <= '0;
      bidx  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          ptr  <= '0;
          sidx <= '0;
          bidx <= '0;
          if (len != 0) begin
            last  <= (int'(len) > DEPTH) ? LEN_W'(DEPTH - 1) : len - 1'b1;
            state <= S_CAPTURE;
          end
        end
        S_CAPTURE: if (in_valid) begin
          if (LEN_W'(ptr) == last) begin
            ptr   <= '0;
            state <= S_READ;
          end else begin
            ptr <= ptr + 1'b1;
          end
        end
        S_READ: state <= S_SEND;
        S_SEND: if (tx_start) begin
          if (int'(bidx) != NB - 1) begin
            bidx <= bidx + 1'b1;
          end else begin
            bidx <= '0;
            if (int'(sidx) != NS - 1) begin
              sidx <= sidx + 1'b1;
            end else begin
              sidx <= '0;
              if (LEN_W'(ptr) == last) begin
                state <= S_DRAIN;
              end else begin
                ptr   <= ptr + 1'b1;
                state <= S_READ;
              end
            end
          end
        end
        S_DRAIN: if (!tx_busy) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk   (clk),
    .rst_n (rst_n),
    .start (tx_start),
    .data  (tx_byte),
    .busy  (tx_busy),
    .txd   (txd)
  );

endmodule

// fir_lpf: 64-tap low-pass FIR applied to the down-converted I' and Q'
// streams, N_PAR outputs per clock (a fully parallel polyphase form).
//
// For every lane p of word k (sample n = k*N_PAR + p)
//   I[n] = sum_{t=0}^{N_TAPS-1} coef[t] * I'[n-t]     (same for Q)
// The block keeps the last HIST = ceil((N_TAPS-1)/N_PAR)*N_PAR input samples
// (64 for the defaults) in a delay line and evaluates all N_PAR outputs of a
// word from that line and the incoming word: 2*N_PAR*N_TAPS = 1024
// multipliers for the defaults, the paper's count. The sums are kept at full
// precision: IN_W + COEF_W + log2(N_TAPS) = 20 + 10 + 6 = 36 bits, the
// paper's output width, so nothing is rounded or dropped.
//
// The delay line moves only on a valid word, so gaps in the input stream do
// not disturb the filter. It starts at zero after reset.
//
// Interface: x_i/x_q lane 0 is the oldest sample; coef[t] multiplies the
// sample t steps in the past (coef[0] the newest, as in Fig. 12), 10-bit
// signed. The same coefficient set filters I' and Q'. Timing: one register
// stage, out_valid follows in_valid by one clock, one word per clock.
//
// From the paper: 64 taps, 10-bit coefficients, identical filtering of I and
// Q, 8 lanes, 36-bit outputs, 1024 multipliers. Own choices: the delay line
// organisation, the pipeline depth, reset to zero and the valid flag.
module fir_lpf #(
  parameter int N_PAR  = dbf_pkg::N_PAR,
  parameter int IN_W   = dbf_pkg::BF_W,
  parameter int N_TAPS = dbf_pkg::N_TAPS,
  parameter int COEF_W = dbf_pkg::COEF_W,
  parameter int OUT_W  = dbf_pkg::FIR_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   x_i  [N_PAR],
  input  logic signed [IN_W-1:0]   x_q  [N_PAR],
  input  logic signed [COEF_W-1:0] coef [N_TAPS],
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  y_i  [N_PAR],
  output logic signed [OUT_W-1:0]  y_q  [N_PAR]
);
  localparam int HIST = ((N_TAPS - 1 + N_PAR - 1) / N_PAR) * N_PAR;
  localparam int LINE = HIST + N_PAR;

  // hist[j]: sample HIST-j steps before lane 0 of the incoming word.
  logic signed [IN_W-1:0]  hist_i [HIST];
  logic signed [IN_W-1:0]  hist_q [HIST];
  logic signed [IN_W-1:0]  line_i [LINE];
  logic signed [IN_W-1:0]  line_q [LINE];
  logic signed [OUT_W-1:0] acc_i  [N_PAR];
  logic signed [OUT_W-1:0] acc_q  [N_PAR];
  logic signed [OUT_W-1:0] xi, xq, c;    // operands widened before multiplying

  always_comb begin
    for (int j = 0; j < HIST; j++) begin
      line_i[j] = hist_i[j];
      line_q[j] = hist_q[j];
    end
    for (int p = 0; p < N_PAR; p++) begin
      line_i[HIST+p] = x_i[p];
      line_q[HIST+p] = x_q[p];
    end
    xi = '0;
    xq = '0;
    c  = '0;
    for (int p = 0; p < N_PAR; p++) begin
      acc_i[p] = '0;
      acc_q[p] = '0;
      for (int t = 0; t < N_TAPS; t++) begin
        c  = OUT_W'(coef[t]);
        xi = OUT_W'(line_i[HIST+p-t]);
        xq = OUT_W'(line_q[HIST+p-t]);
        acc_i[p] += c * xi;
        acc_q[p] += c * xq;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int j = 0; j < HIST; j++) begin
        hist_i[j] <= '0;
        hist_q[j] <= '0;
      end
      for (int p = 0; p < N_PAR; p++) begin
        y_i[p] <= '0;
        y_q[p] <= '0;
      end
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int j = 0; j < HIST; j++) begin
          hist_i[j] <= line_i[j+N_PAR];
          hist_q[j] <= line_q[j+N_PAR];
        end
        for (int p = 0; p < N_PAR; p++) begin
          y_i[p] <= acc_i[p];
          y_q[p] <= acc_q[p];
        end
      end
    end
  end

endmodule

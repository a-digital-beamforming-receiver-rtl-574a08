// digital_beamformer: linear combination of the four real IF channels with
// complex weights, ahead of any down-conversion.
//
// For each of the N_PAR parallel samples p the block forms
//   y_re[p] = sum_i s[i][p] * cos(phi_i)
//   y_im[p] = sum_i s[i][p] * sin(phi_i)
// with N_PAR*N_CH*2 = 64 multipliers (the paper's 64 DSP slices), and keeps
// the full-precision sums (ADC_W+WGT_W+log2(N_CH) = 26 bits). A 20-bit window
// of each sum is then selected: win_lsb is the index of the lowest bit taken,
// so win_lsb = 6 (the reset value of the register that drives it) keeps the 20
// most significant bits, as the paper's default does. Bits above the window
// are dropped (plain truncation, no saturation); win_lsb values above
// FULL_W-OUT_W are clamped to FULL_W-OUT_W.
//
// Interface: s[ch][p] is sample p of channel ch within one clock (p = 0 is the
// oldest), with in_valid marking a new word. w_cos/w_sin are 12-bit signed
// weights (1.0 ~ 2047). Timing: one register stage, out_valid follows
// in_valid by one clock; one word per clock sustained.
//
// From the paper: channel count, 8 parallel samples, 12-bit samples and
// weights, the cos/sin multiply-and-sum structure (Fig. 10) and the 20-bit
// windowed output. Own choices: the window register meaning (LSB index), the
// clamp, the single pipeline stage and the valid flag.
module digital_beamformer #(
  parameter int N_CH  = dbf_pkg::N_CH,
  parameter int N_PAR = dbf_pkg::N_PAR,
  parameter int ADC_W = dbf_pkg::ADC_W,
  parameter int WGT_W = dbf_pkg::WGT_W,
  parameter int OUT_W = dbf_pkg::BF_W,
  parameter int WIN_W = dbf_pkg::WIN_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ADC_W-1:0] s     [N_CH][N_PAR],
  input  logic signed [WGT_W-1:0] w_cos [N_CH],
  input  logic signed [WGT_W-1:0] w_sin [N_CH],
  input  logic [WIN_W-1:0]        win_lsb,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] y_re  [N_PAR],
  output logic signed [OUT_W-1:0] y_im  [N_PAR]
);
  localparam int FULL_W  = ADC_W + WGT_W + $clog2(N_CH);
  localparam int MAX_LSB = FULL_W - OUT_W;

  logic signed [FULL_W-1:0] acc_re [N_PAR];
  logic signed [FULL_W-1:0] acc_im [N_PAR];
  logic [WIN_W-1:0]         lsb;
  logic signed [FULL_W-1:0] xs, wc, ws;   // operands widened before multiplying

  // Multiply-and-sum over channels (Fig. 10).
  always_comb begin
    xs = '0;
    wc = '0;
    ws = '0;
    for (int p = 0; p < N_PAR; p++) begin
      acc_re[p] = '0;
      acc_im[p] = '0;
      for (int c = 0; c < N_CH; c++) begin
        xs = FULL_W'(s[c][p]);
        wc = FULL_W'(w_cos[c]);
        ws = FULL_W'(w_sin[c]);
        acc_re[p] += xs * wc;
        acc_im[p] += xs * ws;
      end
    end
    lsb = (int'(win_lsb) > MAX_LSB) ? WIN_W'(MAX_LSB) : win_lsb;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int p = 0; p < N_PAR; p++) begin
        y_re[p] <= '0;
        y_im[p] <= '0;
      end
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int p = 0; p < N_PAR; p++) begin
          y_re[p] <= OUT_W'(acc_re[p] >>> lsb);
          y_im[p] <= OUT_W'(acc_im[p] >>> lsb);
        end
      end
    end
  end

endmodule

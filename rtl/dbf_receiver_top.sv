// dbf_receiver_top: FPGA data path of the four-channel digital beamforming
// receiver, with the beamformer placed before the complex down-conversion.
//
// Chain (one 200 MHz clock domain, N_PAR = 8 samples per channel per clock):
//   ESIstream RX samples  --+
//                           +-- source mux --> digital_beamformer --> ddc_fs4 --> fir_lpf --> out_i/out_q
//   stimulus_ram ----------+    (4 real ch ->      (fs/4 mixing,      (64 taps,     |
//                                 Re/Im beam,       sign swaps)        36 bits)      +--> debug_capture --> uart_txd
//                                 20 bits)
// The four real IF channels are first combined into one complex beam, so
// only one complex stream is mixed to baseband and low-pass filtered,
// whatever the number of antennas. dbf_regs holds the weights, the beam
// window, the FIR coefficients and the test controls behind a register bus.
//
// Interface: esi_data[ch][p] is sample p (p = 0 oldest) of channel ch from
// the ESIstream receiver, qualified by esi_valid. With source select = 1 the
// stimulus RAM replaces it and plays one word every clock. out_i/out_q carry
// the filtered beam, qualified by out_valid. The register bus (cfg_*) is
// described in dbf_regs.
//
// Timing: a word reaches out_i/out_q three clocks after it is accepted
// (beamformer, down-converter and filter each add one register stage);
// from the stimulus RAM add one clock for its registered read.
//
// From the paper: the block order of the chain, all data widths and the
// debug RAM + UART read-out. Own choices: the valid flags, the register bus,
// the source mux and the stimulus RAM controls.
module dbf_receiver_top #(
  parameter int N_CH  = dbf_pkg::N_CH,
  parameter int N_PAR = dbf_pkg::N_PAR,
  parameter int CLKS_PER_BIT = dbf_pkg::CLKS_PER_BIT
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // from the ESIstream receiver
  input  logic                               esi_valid,
  input  logic signed [dbf_pkg::ADC_W-1:0]   esi_data [N_CH][N_PAR],
  // register bus
  input  logic                               cfg_we,
  input  logic [dbf_pkg::CFG_AW-1:0]         cfg_addr,
  input  logic [dbf_pkg::CFG_DW-1:0]         cfg_wdata,
  output logic [dbf_pkg::CFG_DW-1:0]         cfg_rdata,
  // filtered baseband beam
  output logic                               out_valid,
  output logic signed [dbf_pkg::FIR_W-1:0]   out_i [N_PAR],
  output logic signed [dbf_pkg::FIR_W-1:0]   out_q [N_PAR],
  // debug read-out
  output logic                               uart_txd,
  output logic                               cap_busy
);
  import dbf_pkg::*;

  localparam int LEN_W    = $clog2(CAP_DEPTH + 1);
  localparam int CH_W     = (N_CH > 1) ? $clog2(N_CH) : 1;
  localparam int STIM_LEN = STIM_WORDS * N_PAR;
  localparam int SA_W     = $clog2(STIM_LEN);
  // Window reset: the 20 MSBs of the full-precision beam sum for N_CH channels.
  localparam int WIN_RST  = ADC_W + WGT_W + $clog2(N_CH) - BF_W;

  // configuration
  logic signed [WGT_W-1:0]  w_cos [N_CH];
  logic signed [WGT_W-1:0]  w_sin [N_CH];
  logic [WIN_W-1:0]         win_lsb;
  logic signed [COEF_W-1:0] coef  [N_TAPS];
  logic                     src_sel;
  logic                     cap_start;
  logic [LEN_W-1:0]         cap_len;
  logic                     stim_we;
  logic [CH_W-1:0]          stim_ch;
  logic [SA_W-1:0]          stim_addr;
  logic signed [ADC_W-1:0]  stim_data;
  logic [$clog2(STIM_WORDS+1)-1:0] stim_words;

  // data path
  logic                     stim_valid, src_valid, bf_valid, ddc_valid;
  logic signed [ADC_W-1:0]  stim_s [N_CH][N_PAR];
  logic signed [ADC_W-1:0]  src_s  [N_CH][N_PAR];
  logic signed [BF_W-1:0]   bf_re  [N_PAR];
  logic signed [BF_W-1:0]   bf_im  [N_PAR];
  logic signed [BF_W-1:0]   ddc_i  [N_PAR];
  logic signed [BF_W-1:0]   ddc_q  [N_PAR];

  dbf_regs #(.N_CH(N_CH), .N_PAR(N_PAR), .STIM_LEN(STIM_LEN), .WIN_RST(WIN_RST)) u_regs (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .w_cos, .w_sin, .win_lsb, .coef, .src_sel,
    .cap_start, .cap_len, .cap_busy,
    .stim_we, .stim_ch, .stim_addr, .stim_data, .stim_words
  );

  stimulus_ram #(.N_CH(N_CH), .N_PAR(N_PAR)) u_stim (
    .clk, .rst_n,
    .wr_en   (stim_we),
    .wr_ch   (stim_ch),
    .wr_addr (stim_addr),
    .wr_data (stim_data),
    .play    (src_sel),
    .loop_words (stim_words),
    .valid   (stim_valid),
    .s       (stim_s)
  );

  // Source select: ADC samples from the ESIstream receiver or the test RAM.
  always_comb begin
    src_valid = src_sel ? stim_valid : esi_valid;
    for (int c = 0; c < N_CH; c++)
      for (int p = 0; p < N_PAR; p++)
        src_s[c][p] = src_sel ? stim_s[c][p] : esi_data[c][p];
  end

  digital_beamformer #(.N_CH(N_CH), .N_PAR(N_PAR)) u_bf (
    .clk, .rst_n,
    .in_valid  (src_valid),
    .s         (src_s),
    .w_cos, .w_sin, .win_lsb,
    .out_valid (bf_valid),
    .y_re      (bf_re),
    .y_im      (bf_im)
  );

  ddc_fs4 #(.N_PAR(N_PAR)) u_ddc (
    .clk, .rst_n,
    .in_valid  (bf_valid),
    .re        (bf_re),
    .im        (bf_im),
    .out_valid (ddc_valid),
    .i_o       (ddc_i),
    .q_o       (ddc_q)
  );

  fir_lpf #(.N_PAR(N_PAR)) u_fir (
    .clk, .rst_n,
    .in_valid  (ddc_valid),
    .x_i       (ddc_i),
    .x_q       (ddc_q),
    .coef,
    .out_valid,
    .y_i       (out_i),
    .y_q       (out_q)
  );

  debug_capture #(.N_PAR(N_PAR), .CLKS_PER_BIT(CLKS_PER_BIT)) u_dbg (
    .clk, .rst_n,
    .start    (cap_start),
    .len      (cap_len),
    .in_valid (out_valid),
    .y_i      (out_i),
    .y_q      (out_q),
    .busy     (cap_busy),
    .txd      (uart_txd)
  );

endmodule

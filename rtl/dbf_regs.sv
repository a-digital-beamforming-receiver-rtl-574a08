// dbf_regs: configuration registers of the beamforming receiver.
//
// The paper keeps the complex beamforming weights, the position of the
// beam truncation window and the FIR coefficients in FPGA registers that a
// PC program writes. This block holds them behind a simple synchronous
// register bus and also decodes the controls of the two test aids (source
// select, debug capture start/length, stimulus RAM writes).
//
// Register map (word addresses, see dbf_pkg):
//   0x0100+2*ch  cos(phi_ch)  12-bit signed, reset 2047 (~1.0), ch < 128
//   0x0101+2*ch  sin(phi_ch)  12-bit signed, reset 0
//   0x0010       window LSB   5 bits, reset BF_FULL_W-BF_W = 6 (20 MSBs)
//   0x0011       source       bit0: 0 = ESIstream samples, 1 = stimulus RAM
//   0x0012       capture      write bit0=1: start pulse; read bit0: busy
//   0x0013       capture len  words to capture, reset CAP_DEPTH
//   0x0014       stim length  words played before the stimulus wraps,
//                             reset STIM_WORDS
//   0x0040+t     FIR coef t   10-bit signed, reset 0
//   0x8000+2048*ch+i  stimulus sample i of channel ch (write only, ch < 16)
// Signed registers read back sign-extended.
//
// Timing: a write with cfg_we high takes effect at the next clock edge;
// cap_start and stim_we are one-clock pulses issued at that edge. cfg_rdata
// is combinational from cfg_addr; unmapped and write-only addresses read 0.
//
// From the paper: which values are held in registers and their widths.
// Own choices: the bus, the addresses and all reset values.
module dbf_regs #(
  parameter int N_CH      = dbf_pkg::N_CH,
  parameter int N_PAR     = dbf_pkg::N_PAR,
  parameter int WGT_W     = dbf_pkg::WGT_W,
  parameter int N_TAPS    = dbf_pkg::N_TAPS,
  parameter int COEF_W    = dbf_pkg::COEF_W,
  parameter int WIN_W     = dbf_pkg::WIN_W,
  parameter int WIN_RST   = dbf_pkg::WIN_DEFAULT,
  parameter int CAP_DEPTH = dbf_pkg::CAP_DEPTH,
  parameter int ADC_W     = dbf_pkg::ADC_W,
  parameter int STIM_LEN  = dbf_pkg::STIM_WORDS * dbf_pkg::N_PAR,
  parameter int AW        = dbf_pkg::CFG_AW,
  parameter int DW        = dbf_pkg::CFG_DW,
  localparam int LEN_W    = $clog2(CAP_DEPTH + 1),
  localparam int CH_W     = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int SA_W     = $clog2(STIM_LEN),
  localparam int SW_W     = $clog2(STIM_LEN / N_PAR + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // register bus
  input  logic                     cfg_we,
  input  logic [AW-1:0]            cfg_addr,
  input  logic [DW-1:0]            cfg_wdata,
  output logic [DW-1:0]            cfg_rdata,
  // data path settings
  output logic signed [WGT_W-1:0]  w_cos [N_CH],
  output logic signed [WGT_W-1:0]  w_sin [N_CH],
  output logic [WIN_W-1:0]         win_lsb,
  output logic signed [COEF_W-1:0] coef  [N_TAPS],
  output logic                     src_sel,
  // debug capture
  output logic                     cap_start,
  output logic [LEN_W-1:0]         cap_len,
  input  logic                     cap_busy,
  // stimulus RAM write port
  output logic                     stim_we,
  output logic [CH_W-1:0]          stim_ch,
  output logic [SA_W-1:0]          stim_addr,
  output logic signed [ADC_W-1:0]  stim_data,
  output logic [SW_W-1:0]          stim_words
);
  import dbf_pkg::*;

  localparam logic signed [WGT_W-1:0] ONE = {1'b0, {(WGT_W-1){1'b1}}};

  // Address decode.
  logic          hit_w, hit_coef, hit_stim;
  logic [AW-1:0] off_w, off_coef, off_stim;
  logic [CH_W-1:0] wi;                      // weight channel index
  logic [$clog2(N_TAPS)-1:0] ti;            // coefficient index

  always_comb begin
    off_w    = cfg_addr - REG_WCOS0;
    off_coef = cfg_addr - REG_COEF0;
    off_stim = cfg_addr - REG_STIM0;
    wi       = CH_W'(off_w >> 1);
    ti       = $bits(ti)'(off_coef);
    hit_w    = (cfg_addr >= REG_WCOS0) && (int'(off_w) < 2 * N_CH);
    hit_coef = (cfg_addr >= REG_COEF0) && (int'(off_coef) < N_TAPS);
    hit_stim = (cfg_addr >= REG_STIM0) && (int'(off_stim) < N_CH * STIM_LEN);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CH; c++) begin
        w_cos[c] <= ONE;
        w_sin[c] <= '0;
      end
      for (int t = 0; t < N_TAPS; t++) coef[t] <= '0;
      win_lsb   <= WIN_W'(WIN_RST);
      src_sel   <= 1'b0;
      cap_len   <= LEN_W'(CAP_DEPTH);
      cap_start <= 1'b0;
      stim_we   <= 1'b0;
      stim_ch   <= '0;
      stim_addr <= '0;
      stim_data <= '0;
      stim_words <= SW_W'(STIM_LEN / N_PAR);
    end else begin
      cap_start <= 1'b0;
      stim_we   <= 1'b0;
      if (cfg_we) begin
        if (hit_w) begin
          if (off_w[0]) w_sin[wi] <= cfg_wdata[WGT_W-1:0];
          else          w_cos[wi] <= cfg_wdata[WGT_W-1:0];
        end
        if (hit_coef) coef[ti] <= cfg_wdata[COEF_W-1:0];
        if (hit_stim) begin
          stim_we   <= 1'b1;
          stim_ch   <= CH_W'(int'(off_stim) / STIM_LEN);
          stim_addr <= SA_W'(int'(off_stim) % STIM_LEN);
          stim_data <= cfg_wdata[ADC_W-1:0];
        end
        unique case (cfg_addr)
          REG_WINDOW: win_lsb   <= cfg_wdata[WIN_W-1:0];
          REG_SRC:    src_sel   <= cfg_wdata[0];
          REG_CAPCTL: cap_start <= cfg_wdata[0];
          REG_CAPLEN: cap_len   <= cfg_wdata[LEN_W-1:0];
          REG_STIMLEN: stim_words <= cfg_wdata[SW_W-1:0];
          default: ;
        endcase
      end
    end
  end

  // Read back.
  always_comb begin
    cfg_rdata = '0;
    if (hit_w) begin
      if (off_w[0]) cfg_rdata = DW'(w_sin[wi]);
      else          cfg_rdata = DW'(w_cos[wi]);
    end else if (hit_coef) begin
      cfg_rdata = DW'(coef[ti]);
    end else begin
      unique case (cfg_addr)
        REG_WINDOW: cfg_rdata = DW'(win_lsb);
        REG_SRC:    cfg_rdata = DW'(src_sel);
        REG_CAPCTL: cfg_rdata = DW'(cap_busy);
        REG_CAPLEN: cfg_rdata = DW'(cap_len);
        REG_STIMLEN: cfg_rdata = DW'(stim_words);
        default:    cfg_rdata = '0;
      endcase
    end
  end

endmodule

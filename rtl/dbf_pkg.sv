// dbf_pkg: sizes, register map and the shared sample types of the digital
// beamforming receiver.
//
// The data path runs at 200 MHz and carries 8 parallel samples per clock for
// each of the 4 antenna channels (1.6 GSps per channel). Sample widths follow
// the paper: 12-bit ADC samples, 12-bit beamforming weights, 20-bit beam and
// down-converted samples, 10-bit FIR coefficients, 64 FIR taps and 36-bit
// filtered outputs. The register map and the sizes of the debug and stimulus
// RAMs are this design's own choices; the paper gives neither.
package dbf_pkg;

  // ---- data path sizes (paper) ----
  localparam int N_CH      = 4;    // antenna channels
  localparam int N_PAR     = 8;    // parallel samples per 200 MHz clock
  localparam int ADC_W     = 12;   // ADC sample width
  localparam int WGT_W     = 12;   // width of cos(phi) and sin(phi)
  localparam int BF_W      = 20;   // beamformer / DDC output width
  localparam int N_TAPS    = 64;   // FIR taps
  localparam int COEF_W    = 10;   // FIR coefficient width
  localparam int FIR_W     = 36;   // FIR output width

  // ---- derived sizes ----
  // Full precision of one beam sum: 12x12 product plus log2(4) growth = 26 bits.
  localparam int BF_FULL_W = ADC_W + WGT_W + $clog2(N_CH);
  localparam int WIN_W     = 5;    // width of the truncation window register
  // Default window: the 20 most significant bits of the 26-bit sum.
  localparam int WIN_DEFAULT = BF_FULL_W - BF_W;

  // ---- debug capture and stimulus RAM (own choices) ----
  localparam int CAP_DEPTH    = 512;    // captured output words
  localparam int CLKS_PER_BIT = 1736;   // 200 MHz / 115200 baud
  // Stimulus words (of N_PAR samples) per channel: 2048 samples, room for one
  // 1 us period (1600 samples) of the 1 MHz FM test signal.
  localparam int STIM_WORDS   = 256;

  // ---- register bus ----
  localparam int CFG_AW = 16;
  localparam int CFG_DW = 32;

  // Register map (word addresses).
  localparam logic [CFG_AW-1:0] REG_WCOS0   = 16'h0100; // +2*ch : cos(phi_ch), 12-bit signed
  localparam logic [CFG_AW-1:0] REG_WSIN0   = 16'h0101; // +2*ch : sin(phi_ch), 12-bit signed
  localparam logic [CFG_AW-1:0] REG_WINDOW  = 16'h0010; // LSB position of the 20-bit beam window
  localparam logic [CFG_AW-1:0] REG_SRC     = 16'h0011; // 0: ESIstream samples, 1: stimulus RAM
  localparam logic [CFG_AW-1:0] REG_CAPCTL  = 16'h0012; // write: bit0 = start capture; read: bit0 = busy
  localparam logic [CFG_AW-1:0] REG_CAPLEN  = 16'h0013; // number of words to capture
  localparam logic [CFG_AW-1:0] REG_STIMLEN = 16'h0014; // stimulus words played before wrapping
  localparam logic [CFG_AW-1:0] REG_COEF0   = 16'h0040; // +t : FIR coefficient t, 10-bit signed
  localparam logic [CFG_AW-1:0] REG_STIM0   = 16'h8000; // +ch*2048+i : stimulus sample i of channel ch

  // One complex beamforming weight: e^{j phi} = cos(phi) + j sin(phi).
  typedef struct packed {
    logic signed [WGT_W-1:0] w_sin;
    logic signed [WGT_W-1:0] w_cos;
  } cweight_t;


endpackage

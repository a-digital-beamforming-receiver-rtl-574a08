// stimulus_ram: on-chip test waveform memory, one waveform per channel.
//
// For bench tests the paper stores four synthetic IF waveforms (one per
// antenna channel, each with the delay of a chosen angle of arrival) in FPGA
// RAM and feeds them to the beamformer instead of the ADC data. This block
// holds WORDS*N_PAR samples per channel, written one sample at a time, and
// when play is high it outputs one word of N_PAR samples per channel per
// clock, wrapping back to word 0 after word loop_words-1 (loop_words = 0 or
// above WORDS plays all WORDS words). A loop length lets a waveform whose
// period is not a power of two repeat without a seam.
//
// The samples are kept in one memory per channel and lane, each with one
// write and one read port, so every memory maps onto a block RAM.
//
// Interface: wr_addr is the sample index within a channel (sample i sits in
// lane i mod N_PAR of word i / N_PAR). Timing: the read is registered; s and
// valid appear one clock after the word is addressed, valid is high for every
// played word. Dropping play stops the read pointer; rst_n returns it to 0.
//
// From the paper: four stored waveforms replayed into the data path. Own
// choices: the depth (256 words = 2048 samples per channel), the per-sample
// write port and the looping playback with a programmable length.
module stimulus_ram #(
  parameter int N_CH  = dbf_pkg::N_CH,
  parameter int N_PAR = dbf_pkg::N_PAR,
  parameter int ADC_W = dbf_pkg::ADC_W,
  parameter int WORDS = dbf_pkg::STIM_WORDS,
  localparam int CH_W = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int SA_W = $clog2(WORDS * N_PAR),
  localparam int WA_W = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int LW_W = $clog2(WORDS + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [CH_W-1:0]         wr_ch,
  input  logic [SA_W-1:0]         wr_addr,
  input  logic signed [ADC_W-1:0] wr_data,
  input  logic                    play,
  input  logic [LW_W-1:0]         loop_words,
  output logic                    valid,
  output logic signed [ADC_W-1:0] s [N_CH][N_PAR]
);
  // One narrow memory per channel and lane, so that each has a single write
  // and a single read port and maps onto block RAM.
  logic [WA_W-1:0]         rd_ptr;
  logic [WA_W-1:0]         rd_last;   // last word of the loop
  logic [WA_W-1:0]         wr_word;
  int unsigned             wr_lane;

  assign rd_last = (loop_words == 0 || int'(loop_words) > WORDS) ? WA_W'(WORDS - 1)
                                                                 : WA_W'(loop_words - 1'b1);
  assign wr_word = WA_W'(int'(wr_addr) / N_PAR);
  assign wr_lane = int'(wr_addr) % N_PAR;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    for (genvar p = 0; p < N_PAR; p++) begin : g_lane
      logic signed [ADC_W-1:0] mem [WORDS];
      always_ff @(posedge clk) begin
        if (wr_en && int'(wr_ch) == c && wr_lane == p) mem[wr_word] <= wr_data;
        if (play) s[c][p] <= mem[rd_ptr];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      valid  <= 1'b0;
    end else begin
      valid <= play;
      if (play) rd_ptr <= (rd_ptr == rd_last) ? '0 : rd_ptr + 1'b1;
    end
  end

endmodule

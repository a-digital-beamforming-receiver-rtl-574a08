// tb_stimulus_ram: self-checking test of the stimulus waveform RAM.
//
// Fills all four channels with random samples through the write port, then
// plays them back: each output word must hold the samples of the addressed
// word in lane order, valid must follow play by one clock, the read pointer
// must hold while play is low, and the playback must wrap after the last word,
// both with the full length (loop_words = 0) and with a 37-word loop.
module tb_stimulus_ram;
  localparam int N_CH = 4, N_PAR = 8, ADC_W = 12, WORDS = 256;

  logic clk = 0, rst_n = 0, wr_en = 0, play = 0, valid;
  logic [1:0] wr_ch = '0;
  logic [10:0] wr_addr = '0;
  logic [8:0] loop_words = '0;
  logic signed [ADC_W-1:0] wr_data = '0;
  logic signed [ADC_W-1:0] s [N_CH][N_PAR];
  logic signed [ADC_W-1:0] ref_mem [N_CH][WORDS*N_PAR];
  int checks = 0, failures = 0;
  int exp_word = 0;
  int wraps = 0;

  stimulus_ram dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < N_CH; c++)
      for (int i = 0; i < WORDS * N_PAR; i++) begin
        @(negedge clk);
        wr_en = 1; wr_ch = 2'(c); wr_addr = 11'(i);
        wr_data = ADC_W'($urandom);
        ref_mem[c][i] = wr_data;
      end
    @(negedge clk);
    wr_en = 0;
    checks++;
    if (valid !== 1'b0) failures++;
    // full-length loop, then a 37-word loop (after a reset of the pointer)
    for (int pass = 0; pass < 2; pass++) begin
      int lw;
      lw = (pass == 0) ? WORDS : 37;
      loop_words = (pass == 0) ? 9'd0 : 9'd37;
      if (pass == 1) begin
        @(negedge clk); play = 0; rst_n = 0;
        @(negedge clk); rst_n = 1;
        exp_word = 0;
      end
      for (int k = 0; k < 3 * lw; k++) begin
        @(negedge clk);
        play = (k % 11 != 5);
        @(posedge clk); #1;
        checks++;
        if (valid !== play) begin failures++; $display("valid mismatch k=%0d", k); end
        if (play) begin
          for (int c = 0; c < N_CH; c++)
            for (int p = 0; p < N_PAR; p++) begin
              checks++;
              if (s[c][p] !== ref_mem[c][exp_word * N_PAR + p]) begin
                failures++;
                if (failures < 10) $display("word %0d ch %0d lane %0d: %0d vs %0d", exp_word, c, p, s[c][p], ref_mem[c][exp_word * N_PAR + p]);
              end
            end
          exp_word = (exp_word + 1) % lw;
          if (exp_word == 0) wraps++;
        end
      end
    end
    checks++;
    if (wraps < 4) begin failures++; $display("playback did not wrap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

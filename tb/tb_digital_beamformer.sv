// tb_digital_beamformer: self-checking test of the beamformer.
//
// Random 12-bit samples and weights (plus the extreme codes) are applied for
// several window positions, including the default 20-MSB window and an
// out-of-range value that must clamp. Each output lane is compared with a
// reference computed here in 64-bit integer arithmetic. The one-clock latency
// is checked by comparing the output with the input of the previous clock.
module tb_digital_beamformer;
  localparam int N_CH = 4, N_PAR = 8, ADC_W = 12, WGT_W = 12, OUT_W = 20;
  localparam int FULL_W = ADC_W + WGT_W + 2;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [ADC_W-1:0] s [N_CH][N_PAR];
  logic signed [WGT_W-1:0] w_cos [N_CH], w_sin [N_CH];
  logic [4:0] win_lsb;
  logic signed [OUT_W-1:0] y_re [N_PAR], y_im [N_PAR];
  int checks = 0, failures = 0;

  digital_beamformer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint window(longint full, int lsb);
    longint v;
    if (lsb > FULL_W - OUT_W) lsb = FULL_W - OUT_W;
    v = full >>> lsb;
    v = v & ((64'sd1 <<< OUT_W) - 1);
    if (v >= (64'sd1 <<< (OUT_W - 1))) v -= (64'sd1 <<< OUT_W);
    return v;
  endfunction

  longint exp_re [N_PAR], exp_im [N_PAR];
  longint ar, ai;

  initial begin
    for (int c = 0; c < N_CH; c++) begin w_cos[c] = '0; w_sin[c] = '0;
      for (int p = 0; p < N_PAR; p++) s[c][p] = '0; end
    win_lsb = 5'd6;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      win_lsb = (it % 5 == 0) ? 5'd6 : (it % 5 == 1) ? 5'd0 : (it % 5 == 2) ? 5'd3 :
                (it % 5 == 3) ? 5'd31 : 5'($urandom_range(0, 6));
      for (int c = 0; c < N_CH; c++) begin
        w_cos[c] = (it < 4) ? -12'sd2048 : 12'($urandom);
        w_sin[c] = (it < 4) ?  12'sd2047 : 12'($urandom);
        for (int p = 0; p < N_PAR; p++) s[c][p] = (it < 4) ? -12'sd2048 : 12'($urandom);
      end
      in_valid = (it % 7 != 3);
      for (int p = 0; p < N_PAR; p++) begin
        ar = 0;
        ai = 0;
        for (int c = 0; c < N_CH; c++) begin
          ar += longint'(s[c][p]) * longint'(w_cos[c]);
          ai += longint'(s[c][p]) * longint'(w_sin[c]);
        end
        exp_re[p] = window(ar, int'(win_lsb));
        exp_im[p] = window(ai, int'(win_lsb));
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid !== in_valid) begin failures++; $display("valid mismatch it=%0d", it); end
      if (in_valid)
        for (int p = 0; p < N_PAR; p++) begin
          checks++;
          if (longint'(y_re[p]) != exp_re[p] || longint'(y_im[p]) != exp_im[p]) begin
            failures++;
            if (failures < 10) $display("it=%0d p=%0d re=%0d/%0d im=%0d/%0d", it, p, y_re[p], exp_re[p], y_im[p], exp_im[p]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

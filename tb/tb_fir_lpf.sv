// tb_fir_lpf: self-checking test of the 64-tap, 8-lane FIR filter.
//
// Part 1 loads a single coefficient of 1 at tap k and checks that the
// output is the input delayed by k samples (impulse response, which also
// pins down the tap order and the lane-to-lane history). Part 2 uses random
// coefficients and random full-scale inputs, with gaps in the valid flag,
// and compares every lane with a direct convolution over the stored input
// sequence (only valid words count as samples). Latency of one clock is
// checked on every word.
module tb_fir_lpf;
  localparam int N_PAR = 8, IN_W = 20, N_TAPS = 64, COEF_W = 10, OUT_W = 36;
  localparam int MAXS = 4096;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [IN_W-1:0]   x_i [N_PAR], x_q [N_PAR];
  logic signed [COEF_W-1:0] coef [N_TAPS];
  logic signed [OUT_W-1:0]  y_i [N_PAR], y_q [N_PAR];
  int checks = 0, failures = 0;

  longint hi [MAXS], hq [MAXS];   // input history, index = sample number
  int     ns;                     // samples so far
  longint ei [N_PAR], eq [N_PAR];

  fir_lpf dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int words, input bit gaps, input bit full);
    for (int it = 0; it < words; it++) begin
      @(negedge clk);
      in_valid = gaps ? ($urandom_range(0, 4) != 0) : 1'b1;
      for (int p = 0; p < N_PAR; p++) begin
        x_i[p] = full ? IN_W'($urandom) : IN_W'($urandom_range(0, 2000) - 1000);
        x_q[p] = full ? IN_W'($urandom) : IN_W'($urandom_range(0, 2000) - 1000);
      end
      if (in_valid) begin
        for (int p = 0; p < N_PAR; p++) begin
          hi[ns + p] = x_i[p];
          hq[ns + p] = x_q[p];
        end
        for (int p = 0; p < N_PAR; p++) begin
          ei[p] = 0; eq[p] = 0;
          for (int t = 0; t < N_TAPS; t++)
            if (ns + p - t >= 0) begin
              ei[p] += longint'(coef[t]) * hi[ns + p - t];
              eq[p] += longint'(coef[t]) * hq[ns + p - t];
            end
        end
        ns += N_PAR;
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid !== in_valid) begin failures++; $display("valid mismatch"); end
      if (in_valid)
        for (int p = 0; p < N_PAR; p++) begin
          checks++;
          if (longint'(y_i[p]) != ei[p] || longint'(y_q[p]) != eq[p]) begin
            failures++;
            if (failures < 10) $display("ns=%0d p=%0d I=%0d/%0d Q=%0d/%0d", ns, p, y_i[p], ei[p], y_q[p], eq[p]);
          end
        end
    end
  endtask

  task automatic restart();
    @(negedge clk);
    in_valid = 0;
    rst_n = 0;
    ns = 0;
    @(negedge clk);
    rst_n = 1;
  endtask

  initial begin
    for (int p = 0; p < N_PAR; p++) begin x_i[p] = '0; x_q[p] = '0; end
    ns = 0;
    // impulse responses: single tap k = 1
    for (int k = 0; k < N_TAPS; k += 9) begin
      for (int t = 0; t < N_TAPS; t++) coef[t] = (t == k) ? 10'sd1 : 10'sd0;
      restart();
      run(12, 1'b0, 1'b0);
    end
    for (int t = 0; t < N_TAPS; t++) coef[t] = (t == N_TAPS - 1) ? 10'sd1 : 10'sd0;
    restart();
    run(12, 1'b0, 1'b0);
    // random coefficients and full-scale data, with gaps
    for (int t = 0; t < N_TAPS; t++) coef[t] = COEF_W'($urandom);
    coef[0] = -10'sd512;
    restart();
    run(300, 1'b1, 1'b1);
    // all-extreme case: maximum output magnitude
    for (int t = 0; t < N_TAPS; t++) coef[t] = -10'sd512;
    restart();
    for (int it = 0; it < 12; it++) begin
      @(negedge clk);
      in_valid = 1'b1;
      for (int p = 0; p < N_PAR; p++) begin x_i[p] = {1'b1, 19'd0}; x_q[p] = {1'b0, {19{1'b1}}}; end
      for (int p = 0; p < N_PAR; p++) begin hi[ns + p] = x_i[p]; hq[ns + p] = x_q[p]; end
      for (int p = 0; p < N_PAR; p++) begin
        ei[p] = 0; eq[p] = 0;
        for (int t = 0; t < N_TAPS; t++)
          if (ns + p - t >= 0) begin
            ei[p] += longint'(coef[t]) * hi[ns + p - t];
            eq[p] += longint'(coef[t]) * hq[ns + p - t];
          end
      end
      ns += N_PAR;
      @(posedge clk); #1;
      for (int p = 0; p < N_PAR; p++) begin
        checks++;
        if (longint'(y_i[p]) != ei[p] || longint'(y_q[p]) != eq[p]) begin
          failures++;
          $display("extreme p=%0d I=%0d/%0d Q=%0d/%0d", p, y_i[p], ei[p], y_q[p], eq[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

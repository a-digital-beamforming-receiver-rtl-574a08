// tb_debug_capture: self-checking test of the debug capture and UART
// read-out.
//
// Random filtered words are streamed with gaps in the valid flag. After a
// start pulse the block must store the next len valid words and send them:
// 2*N_PAR samples per word, each as 5 sign-extended bytes, least significant
// byte first, I[0] Q[0] I[1] ... order. A behavioural UART receiver decodes
// the line; every sample is rebuilt and compared with a reference copy of the
// captured words. Also checked: the byte count, busy covering the whole
// read-out and no bytes after it, len = 0 (nothing sent), and len larger
// than the RAM (clamped to DEPTH words). The read-out time per word is
// checked against 2*N_PAR*5 bytes of (10*CLKS_PER_BIT + 1) clocks
// each plus one read cycle.
module tb_debug_capture;
  localparam int N_PAR = 8, W = 36, DEPTH = 8, CPB = 8;
  localparam int NB = 5;

  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, busy, txd;
  logic [3:0] len = '0;
  logic signed [W-1:0] y_i [N_PAR], y_q [N_PAR];
  logic [7:0] rx_data;
  logic rx_strobe, rx_err;
  int checks = 0, failures = 0;

  longint expq [$];       // expected samples in send order
  int armed = 0, ncap = 0, caplen = 0;
  int nbytes = 0, bidx = 0;
  longint acc = 0;
  int busy_clks = 0;

  debug_capture #(.N_PAR(N_PAR), .W(W), .DEPTH(DEPTH), .CLKS_PER_BIT(CPB)) dut (.*);
  uart_rx_model #(.CLKS_PER_BIT(CPB)) rx (.clk, .rxd(txd), .data(rx_data), .strobe(rx_strobe), .frame_err(rx_err));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference capture
  always @(posedge clk) begin
    if (rst_n) begin
      if (armed && in_valid && ncap < caplen) begin
        for (int p = 0; p < N_PAR; p++) begin
          expq.push_back(longint'(y_i[p]));
          expq.push_back(longint'(y_q[p]));
        end
        ncap++;
      end
      if (start && !busy) begin armed = 1; ncap = 0; end
      if (busy) busy_clks++;
    end
  end

  // decode bytes into samples
  always @(posedge clk) begin
    if (rx_strobe) begin
      nbytes++;
      acc = acc | (longint'(rx_data) << (8 * bidx));
      bidx++;
      if (bidx == NB) begin
        longint v;
        v = acc;
        if (v >= (64'sd1 <<< (8*NB-1))) v -= (64'sd1 <<< (8*NB));
        checks++;
        if (expq.size() == 0) begin
          failures++; $display("unexpected sample %0d", v);
        end else begin
          if (v != expq[0]) begin
            failures++;
            if (failures < 10) $display("sample mismatch got %0d exp %0d", v, expq[0]);
          end
          void'(expq.pop_front());
        end
        acc = 0; bidx = 0;
      end
    end
    if (rx_err) begin checks++; failures++; $display("framing error"); end
  end

  // stimulus
  initial begin
    forever begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int p = 0; p < N_PAR; p++) begin
        y_i[p] = W'({$urandom, $urandom});
        y_q[p] = W'({$urandom, $urandom});
      end
      if ($urandom_range(0, 9) == 0) begin
        for (int p = 0; p < N_PAR; p++) begin y_i[p] = {1'b1, {(W-1){1'b0}}}; y_q[p] = {1'b0, {(W-1){1'b1}}}; end
      end
    end
  end

  task automatic one_run(input int l, input int exp_words);
    int t0;
    nbytes = 0;
    busy_clks = 0;
    @(negedge clk);
    len = 4'(l);
    caplen = exp_words;
    start = 1;
    @(negedge clk);
    start = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (3 * CPB) @(negedge clk);
    armed = 0;
    checks++;
    if (nbytes != exp_words * 2 * N_PAR * NB) begin
      failures++; $display("len %0d: %0d bytes", l, nbytes);
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d samples missing", expq.size()); end
    // read-out time: at least the UART time of all bytes
    checks++;
    if (exp_words != 0 && busy_clks < exp_words * (2 * N_PAR * NB * 10 * CPB)) begin
      failures++; $display("busy too short: %0d", busy_clks);
    end
    checks++;
    if (exp_words != 0 && busy_clks > exp_words * (2 * N_PAR * NB * (10 * CPB + 1) + 1) + 40 * exp_words + 40) begin
      failures++; $display("busy too long: %0d", busy_clks);
    end
  endtask

  initial begin
    for (int p = 0; p < N_PAR; p++) begin y_i[p] = '0; y_q[p] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    checks++;
    if (busy !== 1'b0 || txd !== 1'b1) failures++;
    one_run(3, 3);
    one_run(1, 1);
    one_run(0, 0);
    one_run(12, DEPTH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

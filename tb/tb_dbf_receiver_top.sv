// tb_dbf_receiver_top: end-to-end test of the receiver at its default sizes
// (4 channels, 8 samples per clock, 64-tap filter, 115200-baud debug link).
//
// The bench plays the role of the ESIstream receiver and of the PC. It
// programs the beam weights for a plane wave arriving at 10 degrees on a
// half-wavelength array, loads a 64-tap windowed-sinc low-pass filter
// (quantised to 10 bits), and streams a 400 MHz IF tone with the matching
// per-channel phase plus noise, with random gaps in the valid flag. An
// independent model of the chain (beamformer with window, fs/4 mixer, FIR),
// written here in integer arithmetic, predicts every output word; each is
// compared, and the latency (3 clocks from an accepted word to out_valid) is
// checked.
//
// Mechanisms made to happen and counted (a count of zero is a failure):
//   gaps       clocks with esi_valid low while the stream runs
//   window     writes of a new beam window position
//   weights    changes of the steering weights
//   stim       switches to the stimulus RAM source (and back); the RAM
//              plays a 40-word loop, so it wraps several times
//   saturate   a beam sample of -2^19 that the down-converter saturates
//   capture    a debug capture whose UART bytes are decoded and compared
// A beam-steering check also compares the output power of the steered beam
// with that of a beam steered away from the source.
module tb_dbf_receiver_top;
  import dbf_pkg::*;
  localparam int STIM_LEN = STIM_WORDS * N_PAR;
  localparam int STIM_LOOP = 40;            // words played before wrapping
  localparam int NB = (FIR_W + 7) / 8;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  logic esi_valid = 0;
  logic signed [ADC_W-1:0] esi_data [N_CH][N_PAR];
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0, cfg_rdata;
  logic out_valid;
  logic signed [FIR_W-1:0] out_i [N_PAR], out_q [N_PAR];
  logic uart_txd, cap_busy;
  logic [7:0] rx_data;
  logic rx_strobe, rx_err;

  int checks = 0, failures = 0;
  int cnt_gaps = 0, cnt_window = 0, cnt_weights = 0, cnt_stim = 0, cnt_sat = 0, cnt_capture = 0;
  longint cyc = 0;

  dbf_receiver_top dut (.*);
  uart_rx_model #(.CLKS_PER_BIT(CLKS_PER_BIT)) rx (.clk, .rxd(uart_txd), .data(rx_data), .strobe(rx_strobe), .frame_err(rx_err));

  always #2.5 clk = ~clk;   // 200 MHz

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  int m_cos [N_CH], m_sin [N_CH], m_win = WIN_DEFAULT;
  int m_coef [N_TAPS];
  longint m_n = 0;                    // down-converter sample index
  longint m_hi [$], m_hq [$];         // FIR input history (newest last)
  longint m_stim [N_CH][STIM_LEN];
  int     st_ptr = 0, st_word = 0;    // stimulus RAM mirror
  bit     st_valid = 0;
  longint exp_i [$][N_PAR], exp_q [$][N_PAR];
  longint exp_cyc [$];
  longint last_i [N_PAR], last_q [N_PAR];
  real    pow_acc = 0;

  function automatic longint trunc_win(longint full);
    longint v;
    int lsb;
    lsb = (m_win > BF_FULL_W - BF_W) ? BF_FULL_W - BF_W : m_win;
    v = full >>> lsb;
    v = v & ((64'sd1 <<< BF_W) - 1);
    if (v >= (64'sd1 <<< (BF_W - 1))) v -= (64'sd1 <<< BF_W);
    return v;
  endfunction

  function automatic longint nsat(longint v);
    if (v == -(64'sd1 <<< (BF_W - 1))) return (64'sd1 <<< (BF_W - 1)) - 1;
    return -v;
  endfunction

  task automatic accept(input longint s [N_CH][N_PAR]);
    longint re, im, iv, qv, ai, aq;
    longint wi [N_PAR], wq [N_PAR];
    for (int p = 0; p < N_PAR; p++) begin
      re = 0; im = 0;
      for (int c = 0; c < N_CH; c++) begin
        re += s[c][p] * m_cos[c];
        im += s[c][p] * m_sin[c];
      end
      re = trunc_win(re);
      im = trunc_win(im);
      case ((m_n + p) % 4)
        0: begin iv = re;       qv = im;       end
        1: begin iv = im;       qv = nsat(re); end
        2: begin iv = nsat(re); qv = nsat(im); end
        default: begin iv = nsat(im); qv = re; end
      endcase
      if (((m_n + p) % 4 == 1 || (m_n + p) % 4 == 2) && re == -(64'sd1 <<< (BF_W - 1))) cnt_sat++;
      m_hi.push_back(iv);
      m_hq.push_back(qv);
    end
    m_n += N_PAR;
    for (int p = 0; p < N_PAR; p++) begin
      ai = 0; aq = 0;
      for (int t = 0; t < N_TAPS; t++) begin
        int idx;
        idx = m_hi.size() - N_PAR + p - t;
        if (idx >= 0) begin
          ai += longint'(m_coef[t]) * m_hi[idx];
          aq += longint'(m_coef[t]) * m_hq[idx];
        end
      end
      wi[p] = ai; wq[p] = aq;
    end
    while (m_hi.size() > N_TAPS + N_PAR) begin void'(m_hi.pop_front()); void'(m_hq.pop_front()); end
    exp_i.push_back(wi);
    exp_q.push_back(wq);
    exp_cyc.push_back(cyc);
  endtask

  // Clock counter, stepped away from the rising edge so that all monitors
  // see the same value.
  always @(negedge clk) cyc++;

  // Input monitor: mirrors the source mux and the stimulus RAM playback.
  always @(posedge clk) begin
    longint w [N_CH][N_PAR];
    bit sel;
    if (rst_n) begin
      sel = dut.src_sel;
      if (!sel && esi_valid) begin
        for (int c = 0; c < N_CH; c++) for (int p = 0; p < N_PAR; p++) w[c][p] = esi_data[c][p];
        accept(w);
      end
      if (sel && st_valid) begin
        for (int c = 0; c < N_CH; c++) for (int p = 0; p < N_PAR; p++) w[c][p] = m_stim[c][st_word * N_PAR + p];
        accept(w);
      end
      st_valid = sel;
      if (sel) begin
        st_word = st_ptr;
        st_ptr = (st_ptr + 1) % STIM_LOOP;
      end
    end
  end

  // Output checker.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_i.size() == 0) begin
        failures++; $display("unexpected output word");
      end else begin
        if (cyc - exp_cyc[0] != 3) begin
          failures++; $display("latency %0d", cyc - exp_cyc[0]);
        end
        for (int p = 0; p < N_PAR; p++) begin
          if (longint'(out_i[p]) != exp_i[0][p] || longint'(out_q[p]) != exp_q[0][p]) begin
            failures++;
            if (failures < 10) $display("cyc %0d lane %0d: I %0d/%0d Q %0d/%0d", cyc, p, out_i[p], exp_i[0][p], out_q[p], exp_q[0][p]);
          end
          last_i[p] = out_i[p];
          last_q[p] = out_q[p];
          pow_acc += real'(out_i[p]) * real'(out_i[p]) + real'(out_q[p]) * real'(out_q[p]);
        end
        void'(exp_i.pop_front()); void'(exp_q.pop_front()); void'(exp_cyc.pop_front());
      end
    end
  end

  // Debug capture reference and UART decoding.
  longint cap_q [$];
  int cap_armed = 0, cap_n = 0, cap_len_m = 0, cap_bytes = 0, bidx = 0;
  longint acc = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (cap_armed && out_valid && cap_n < cap_len_m) begin
        for (int p = 0; p < N_PAR; p++) begin
          cap_q.push_back(longint'(out_i[p]));
          cap_q.push_back(longint'(out_q[p]));
        end
        cap_n++;
      end
      if (dut.cap_start && !cap_busy) begin cap_armed = 1; cap_n = 0; end
    end
    if (rx_strobe) begin
      cap_bytes++;
      acc = acc | (longint'(rx_data) << (8 * bidx));
      bidx++;
      if (bidx == NB) begin
        longint v;
        v = acc;
        if (v >= (64'sd1 <<< (8*NB-1))) v -= (64'sd1 <<< (8*NB));
        checks++;
        if (cap_q.size() == 0) begin failures++; $display("unexpected UART sample"); end
        else begin
          if (v != cap_q[0]) begin failures++; $display("UART sample %0d expected %0d", v, cap_q[0]); end
          void'(cap_q.pop_front());
        end
        acc = 0; bidx = 0;
      end
    end
    if (rx_err) begin checks++; failures++; $display("UART framing error"); end
  end

  // ---------------- stimulus ----------------
  task automatic wr(input int a, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_AW'(a); cfg_wdata = CFG_DW'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic idle(input int n);
    @(negedge clk);
    esi_valid = 0;
    repeat (n) @(negedge clk);
  endtask

  // Steering weights for angle theta_deg on a half-wavelength array.
  task automatic steer(input real theta_deg);
    real ph;
    idle(6);
    for (int c = 0; c < N_CH; c++) begin
      ph = PI * $sin(theta_deg * PI / 180.0) * c;
      m_cos[c] = int'($floor(2047.0 * $cos(ph) + 0.5));
      m_sin[c] = int'($floor(2047.0 * $sin(ph) + 0.5));
      wr(REG_WCOS0 + 2 * c, m_cos[c]);
      wr(REG_WSIN0 + 2 * c, m_sin[c]);
    end
    cnt_weights++;
    idle(6);
  endtask

  task automatic set_window(input int w);
    idle(6);
    wr('h10, w);
    m_win = w;
    cnt_window++;
    idle(6);
  endtask

  // IF tone at fs/4 arriving at theta_deg: channel c lags by pi*sin(theta)*c.
  longint n_in = 0;
  task automatic stream(input int words, input real theta_deg, input int amp, input bit gaps);
    real ph;
    for (int k = 0; k < words; k++) begin
      @(negedge clk);
      esi_valid = gaps ? ($urandom_range(0, 4) != 0) : 1'b1;
      if (!esi_valid) cnt_gaps++;
      for (int c = 0; c < N_CH; c++)
        for (int p = 0; p < N_PAR; p++) begin
          ph = PI / 2.0 * real'(n_in + p) - PI * $sin(theta_deg * PI / 180.0) * c;
          esi_data[c][p] = ADC_W'(int'($floor(real'(amp) * $cos(ph) + 0.5)) + $urandom_range(0, 40) - 20);
        end
      if (esi_valid) n_in += N_PAR;
    end
    idle(6);
  endtask

  real p_on, p_off;

  initial begin
    for (int c = 0; c < N_CH; c++) for (int p = 0; p < N_PAR; p++) esi_data[c][p] = '0;
    for (int c = 0; c < N_CH; c++) begin m_cos[c] = 2047; m_sin[c] = 0; end
    for (int t = 0; t < N_TAPS; t++) m_coef[t] = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // reset value of the window register read back
    @(negedge clk); cfg_addr = 12'h010; #1;
    checks++;
    if (cfg_rdata != CFG_DW'(WIN_DEFAULT)) begin failures++; $display("window reset value"); end
    // 64-tap windowed-sinc low-pass, cut-off fs/16, 10-bit coefficients
    for (int t = 0; t < N_TAPS; t++) begin
      real x, h;
      x = real'(t) - (N_TAPS - 1) / 2.0;
      h = $sin(2.0 * PI * x / 16.0) / (PI * x) * (0.54 - 0.46 * $cos(2.0 * PI * t / (N_TAPS - 1)));
      m_coef[t] = int'($floor(h * 511.0 / 0.125 + 0.5));
      if (m_coef[t] > 511) m_coef[t] = 511;
      if (m_coef[t] < -512) m_coef[t] = -512;
      wr('h40 + t, m_coef[t]);
    end
    // beam steered at the source (10 degrees), with gaps
    steer(10.0);
    stream(40, 10.0, 1500, 1'b1);
    pow_acc = 0;
    stream(40, 10.0, 1500, 1'b0);
    p_on = pow_acc;
    // beam steered away (-40 degrees)
    steer(-40.0);
    stream(20, 10.0, 1500, 1'b1);
    pow_acc = 0;
    stream(40, 10.0, 1500, 1'b0);
    p_off = pow_acc;
    checks++;
    $display("steered beam power / off-target power = %0.1f", p_on / p_off);
    if (!(p_on > 4.0 * p_off)) begin failures++; $display("beam steering: no gain on target"); end
    // other window positions
    set_window(3);
    stream(20, 10.0, 1500, 1'b1);
    set_window(31);
    stream(10, 10.0, 1500, 1'b1);
    // force a beam sample of -2^19: all channels -2048, cos weight 64, window 0
    idle(6);
    for (int c = 0; c < N_CH; c++) begin
      m_cos[c] = 64; m_sin[c] = 0;
      wr(REG_WCOS0 + 2 * c, 64); wr(REG_WSIN0 + 2 * c, 0);
    end
    cnt_weights++;
    set_window(0);
    for (int k = 0; k < 6; k++) begin
      @(negedge clk);
      esi_valid = 1;
      for (int c = 0; c < N_CH; c++) for (int p = 0; p < N_PAR; p++) esi_data[c][p] = -12'sd2048;
    end
    idle(6);
    set_window(WIN_DEFAULT);
    steer(10.0);
    // stimulus RAM: same scene at 10 degrees, stored by the register bus
    for (int c = 0; c < N_CH; c++)
      for (int i = 0; i < STIM_LOOP * N_PAR; i++) begin
        real ph;
        ph = PI / 2.0 * i - PI * $sin(10.0 * PI / 180.0) * c + 0.3;
        m_stim[c][i] = longint'(int'($floor(1000.0 * $cos(ph) + 0.5)));
        wr(REG_STIM0 + c * STIM_LEN + i, int'(m_stim[c][i]));
      end
    wr(REG_STIMLEN, STIM_LOOP);
    idle(6);
    wr('h11, 1);
    cnt_stim++;
    repeat (150) @(negedge clk);
    wr('h11, 0);
    idle(8);
    stream(20, 10.0, 1500, 1'b1);
    wr('h11, 1);
    cnt_stim++;
    repeat (20) @(negedge clk);
    wr('h11, 0);
    idle(8);
    // debug capture of 2 words while the stream runs, read out over the UART
    wr('h13, 2);
    cap_len_m = 2;
    wr('h12, 1);
    fork
      stream(30, 10.0, 1500, 1'b1);
      begin
        @(negedge clk);
        @(negedge clk);
        while (cap_busy) @(negedge clk);
      end
    join
    repeat (3 * CLKS_PER_BIT) @(negedge clk);
    checks++;
    if (cap_bytes != 2 * 2 * N_PAR * NB || cap_q.size() != 0) begin
      failures++; $display("capture: %0d bytes, %0d samples left", cap_bytes, cap_q.size());
    end else cnt_capture++;
    idle(10);
    checks++;
    if (exp_i.size() != 0) begin failures++; $display("%0d words never came out", exp_i.size()); end
    $display("mechanisms: gaps=%0d window=%0d weights=%0d stim=%0d saturate=%0d capture=%0d",
             cnt_gaps, cnt_window, cnt_weights, cnt_stim, cnt_sat, cnt_capture);
    checks++;
    if (cnt_gaps == 0 || cnt_window == 0 || cnt_weights == 0 || cnt_stim == 0 || cnt_sat == 0 || cnt_capture == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

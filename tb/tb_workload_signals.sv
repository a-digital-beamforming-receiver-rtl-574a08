// tb_workload_signals: the two signal scenarios used to validate the
// receiver, run on the full-size design.
//
// 1. Beam of an FM signal (stimulus RAM source). Four channel waveforms of an
//    FM signal on the 400 MHz IF (1 MHz modulating tone, +/-100 MHz peak
//    deviation), arriving at 10 degrees on a half-wavelength 4-element array,
//    are written to the stimulus RAM, one 1 us period (1600 samples) per
//    channel, and played in a loop. With the weights steered to 10 degrees
//    the filtered baseband beam must have a near-constant magnitude and an
//    instantaneous frequency that swings between about +100 MHz and
//    -100 MHz. With the weights steered to -40 degrees the beam power must
//    drop by more than 4x.
// 2. IQ-modulated carrier (ESIstream source). A carrier at the 400 MHz IF
//    carries I = 30 MHz and Q = 5 MHz tones (the alias of a 2 GHz carrier
//    sampled at 1.6 GHz). Only channel 1 is weighted. After down-conversion
//    and filtering the I output must be dominated by the 30 MHz tone and the
//    Q output by the 5 MHz tone (single-bin DFTs over 2 us).
// The FIR is loaded with a 64-tap Hamming-windowed sinc, cut-off fs/8
// (200 MHz), quantised to 10 bits.
module tb_workload_signals;
  import dbf_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam real FS = 1.6e9;
  localparam int  PERIOD = 1600;            // samples of one 1 MHz period
  localparam int  NOUT = 3200;              // output samples analysed

  logic clk = 0, rst_n = 0;
  logic esi_valid = 0;
  logic signed [ADC_W-1:0] esi_data [N_CH][N_PAR];
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0, cfg_rdata;
  logic out_valid;
  logic signed [FIR_W-1:0] out_i [N_PAR], out_q [N_PAR];
  logic uart_txd, cap_busy;

  int checks = 0, failures = 0;

  dbf_receiver_top dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output recorder
  real yi [$], yq [$];
  bit  rec = 0;
  always @(posedge clk)
    if (rst_n && rec && out_valid)
      for (int p = 0; p < N_PAR; p++) begin
        yi.push_back(real'(out_i[p]));
        yq.push_back(real'(out_q[p]));
      end

  task automatic wr(input int a, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_AW'(a); cfg_wdata = CFG_DW'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic steer(input real theta_deg);
    real ph;
    for (int c = 0; c < N_CH; c++) begin
      ph = PI * $sin(theta_deg * PI / 180.0) * c;
      wr(REG_WCOS0 + 2 * c, int'($floor(2047.0 * $cos(ph) + 0.5)));
      wr(REG_WSIN0 + 2 * c, int'($floor(2047.0 * $sin(ph) + 0.5)));
    end
  endtask

  task automatic record(input int samples);
    yi.delete(); yq.delete();
    rec = 1;
    while (yi.size() < samples) @(negedge clk);
    rec = 0;
  endtask

  function automatic real power();
    real s = 0;
    foreach (yi[k]) s += yi[k] * yi[k] + yq[k] * yq[k];
    return s / yi.size();
  endfunction

  function automatic real dft_mag(input bit use_q, input real f);
    real re = 0, im = 0, v;
    foreach (yi[k]) begin
      v = use_q ? yq[k] : yi[k];
      re += v * $cos(2.0 * PI * f * k / FS);
      im -= v * $sin(2.0 * PI * f * k / FS);
    end
    return $sqrt(re * re + im * im);
  endfunction

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  real p_on, p_off, fmax, fmin, f, ph, mag, mmin, mmax, a30, a5, b30, b5;
  int  n_in;

  initial begin
    for (int c = 0; c < N_CH; c++) for (int p = 0; p < N_PAR; p++) esi_data[c][p] = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < N_TAPS; t++) begin
      real x, h;
      x = real'(t) - (N_TAPS - 1) / 2.0;
      h = $sin(2.0 * PI * x / 8.0) / (PI * x) * (0.54 - 0.46 * $cos(2.0 * PI * t / (N_TAPS - 1)));
      wr(REG_COEF0 + t, int'($floor(h * 511.0 / 0.25 + 0.5)));
    end

    // ---- 1. FM beam from the stimulus RAM ----
    for (int c = 0; c < N_CH; c++)
      for (int i = 0; i < PERIOD; i++) begin
        ph = PI / 2.0 * i + 100.0 * $sin(2.0 * PI * i / PERIOD) - PI * $sin(10.0 * PI / 180.0) * c;
        wr(REG_STIM0 + c * STIM_WORDS * N_PAR + i,
           int'($floor(1800.0 * $cos(ph) + 0.5)) + $urandom_range(0, 16) - 8);
      end
    wr(REG_STIMLEN, PERIOD / N_PAR);
    steer(10.0);
    wr(REG_SRC, 1);
    repeat (40) @(negedge clk);
    record(2 * PERIOD);
    p_on = power();
    fmax = -1e12; fmin = 1e12; mmin = 1e30; mmax = 0;
    for (int k = 1; k < yi.size(); k++) begin
      // phase step between consecutive complex outputs
      f = $atan2(yq[k] * yi[k-1] - yi[k] * yq[k-1], yi[k] * yi[k-1] + yq[k] * yq[k-1]) * FS / (2.0 * PI);
      if (f > fmax) fmax = f;
      if (f < fmin) fmin = f;
      mag = $sqrt(yi[k] * yi[k] + yq[k] * yq[k]);
      if (mag > mmax) mmax = mag;
      if (mag < mmin) mmin = mag;
    end
    $display("FM beam: instantaneous frequency %0.1f .. %0.1f MHz, magnitude %0.3g .. %0.3g",
             fmin / 1e6, fmax / 1e6, mmin, mmax);
    check("FM peak deviation +100 MHz", fmax > 90e6 && fmax < 110e6);
    check("FM peak deviation -100 MHz", fmin < -90e6 && fmin > -110e6);
    check("FM magnitude nearly constant", mmin > 0.7 * mmax);
    steer(-40.0);
    repeat (40) @(negedge clk);
    record(PERIOD);
    p_off = power();
    $display("FM beam: power steered at 10 deg / steered at -40 deg = %0.1f", p_on / p_off);
    check("beam rejects a source off its direction", p_on > 4.0 * p_off);
    wr(REG_SRC, 0);

    // ---- 2. IQ-modulated carrier through the ESIstream port ----
    for (int c = 0; c < N_CH; c++) begin
      wr(REG_WCOS0 + 2 * c, c == 0 ? 2047 : 0);
      wr(REG_WSIN0 + 2 * c, 0);
    end
    n_in = 0;
    fork
      forever begin
        @(negedge clk);
        esi_valid = 1;
        for (int p = 0; p < N_PAR; p++) begin
          real iv, qv, t;
          t = real'(n_in + p) / FS;
          iv = $cos(2.0 * PI * 30e6 * t);
          qv = $cos(2.0 * PI * 5e6 * t);
          for (int c = 0; c < N_CH; c++)
            esi_data[c][p] = ADC_W'(int'($floor(900.0 * (iv * $cos(PI / 2.0 * (n_in + p)) - qv * $sin(PI / 2.0 * (n_in + p))) + 0.5)));
        end
        n_in += N_PAR;
      end
      begin
        repeat (40) @(negedge clk);
        record(NOUT);
      end
    join_any
    disable fork;
    a30 = dft_mag(0, 30e6); a5 = dft_mag(0, 5e6);
    b30 = dft_mag(1, 30e6); b5 = dft_mag(1, 5e6);
    $display("IQ test: I output 30 MHz/5 MHz = %0.1f, Q output 5 MHz/30 MHz = %0.1f", a30 / a5, b5 / b30);
    check("I carries the 30 MHz tone", a30 > 10.0 * a5);
    check("Q carries the 5 MHz tone", b5 > 10.0 * b30);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

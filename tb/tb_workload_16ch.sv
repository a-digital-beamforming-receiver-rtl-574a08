// tb_workload_16ch: the receiver grown to 16 antenna channels.
//
// Only the beamformer grows with the channel count; the down-converter and
// the filter stay those of the 4-channel design. The bench builds the top
// with N_CH = 16, checks that the beam window now defaults to the 20 MSBs of
// the wider 28-bit sum (window LSB 8), streams a 400 MHz IF tone arriving at
// 10 degrees on a half-wavelength 16-element array, and compares the output
// power with the weights steered at the source and steered to -40 degrees
// (the ideal array factor gives a ratio of about 240; more than 50 is
// required). A second run with equal weights and the tone at broadside checks
// the coherent gain: the output must be within 10% of a single-channel run
// scaled by 16.
module tb_workload_16ch;
  import dbf_pkg::*;
  localparam int  NC = 16;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  logic esi_valid = 0;
  logic signed [ADC_W-1:0] esi_data [NC][N_PAR];
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0, cfg_rdata;
  logic out_valid;
  logic signed [FIR_W-1:0] out_i [N_PAR], out_q [N_PAR];
  logic uart_txd, cap_busy;

  int checks = 0, failures = 0;
  real pw = 0;
  int  npw = 0;
  bit  rec = 0;

  dbf_receiver_top #(.N_CH(NC)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk)
    if (rst_n && rec && out_valid)
      for (int p = 0; p < N_PAR; p++) begin
        pw += real'(out_i[p]) * real'(out_i[p]) + real'(out_q[p]) * real'(out_q[p]);
        npw++;
      end

  task automatic wr(input int a, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_AW'(a); cfg_wdata = CFG_DW'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // weights steered to theta; only the first 'used' channels weighted
  task automatic steer(input real theta_deg, input int used);
    real ph;
    for (int c = 0; c < NC; c++) begin
      ph = PI * $sin(theta_deg * PI / 180.0) * c;
      wr(REG_WCOS0 + 2 * c, c < used ? int'($floor(2047.0 * $cos(ph) + 0.5)) : 0);
      wr(REG_WSIN0 + 2 * c, c < used ? int'($floor(2047.0 * $sin(ph) + 0.5)) : 0);
    end
  endtask

  longint n_in = 0;
  // stream a tone from theta for 'words' clocks, measure the last 'meas'
  task automatic run(input real theta_deg, input int words, input int meas, output real p);
    real ph;
    pw = 0; npw = 0;
    for (int k = 0; k < words; k++) begin
      @(negedge clk);
      esi_valid = 1;
      rec = (k >= words - meas);
      for (int c = 0; c < NC; c++)
        for (int q = 0; q < N_PAR; q++) begin
          ph = PI / 2.0 * real'(n_in + q) + 0.2 - PI * $sin(theta_deg * PI / 180.0) * c;
          esi_data[c][q] = ADC_W'(int'($floor(1500.0 * $cos(ph) + 0.5)));
        end
      n_in += N_PAR;
    end
    @(negedge clk); esi_valid = 0;
    repeat (4) @(negedge clk);
    rec = 0;
    p = pw / npw;
  endtask

  real p_on, p_off, p_one, p_all;

  initial begin
    for (int c = 0; c < NC; c++) for (int q = 0; q < N_PAR; q++) esi_data[c][q] = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk); cfg_addr = REG_WINDOW; #1;
    check("window defaults to the 20 MSBs of the 28-bit sum", cfg_rdata == 8);
    for (int t = 0; t < N_TAPS; t++) begin
      real x, h;
      x = real'(t) - (N_TAPS - 1) / 2.0;
      h = $sin(2.0 * PI * x / 8.0) / (PI * x) * (0.54 - 0.46 * $cos(2.0 * PI * t / (N_TAPS - 1)));
      wr(REG_COEF0 + t, int'($floor(h * 511.0 / 0.25 + 0.5)));
    end
    steer(10.0, NC);
    run(10.0, 40, 20, p_on);
    steer(-40.0, NC);
    run(10.0, 40, 20, p_off);
    $display("16 channels: power steered at source / steered at -40 deg = %0.1f", p_on / p_off);
    check("16-channel beam rejects an off-direction source", p_on > 50.0 * p_off);
    steer(0.0, 1);
    run(0.0, 40, 20, p_one);
    steer(0.0, NC);
    run(0.0, 40, 20, p_all);
    $display("16 channels: coherent amplitude gain = %0.2f", $sqrt(p_all / p_one));
    check("coherent gain of 16", $sqrt(p_all / p_one) > 14.4 && $sqrt(p_all / p_one) < 17.6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dbf_regs: self-checking test of the configuration register file.
//
// Checks the reset values, writes and reads back every weight and FIR
// coefficient through the bus, checks the window, source and capture-length
// registers, the one-clock capture start pulse, the busy status bit, and
// the decoding of stimulus RAM writes into channel, sample and data, and
// the stimulus loop length.
module tb_dbf_regs;
  import dbf_pkg::*;
  localparam int STIM_LEN = STIM_WORDS * N_PAR;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0, cfg_rdata;
  logic signed [WGT_W-1:0] w_cos [N_CH], w_sin [N_CH];
  logic [WIN_W-1:0] win_lsb;
  logic signed [COEF_W-1:0] coef [N_TAPS];
  logic src_sel, cap_start, cap_busy = 0, stim_we;
  logic [9:0] cap_len;
  logic [1:0] stim_ch;
  logic [10:0] stim_addr;
  logic [8:0] stim_words;
  logic signed [ADC_W-1:0] stim_data;
  int checks = 0, failures = 0;
  int pulses = 0;
  logic signed [WGT_W-1:0] mc [N_CH], ms [N_CH];
  logic signed [COEF_W-1:0] mk [N_TAPS];

  dbf_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && cap_start) pulses++;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic wr(input int a, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_AW'(a); cfg_wdata = CFG_DW'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic chk_rd(input string what, input int a, input longint exp);
    cfg_addr = CFG_AW'(a);
    #1;
    check(what, longint'($signed(cfg_rdata)), exp);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < N_CH; c++) begin
      check("reset cos", w_cos[c], 2047);
      check("reset sin", w_sin[c], 0);
    end
    check("reset window", win_lsb, 6);
    check("reset src", src_sel, 0);
    check("reset caplen", cap_len, CAP_DEPTH);
    check("reset stim words", stim_words, STIM_WORDS);
    for (int t = 0; t < N_TAPS; t++) check("reset coef", coef[t], 0);
    // weights
    for (int c = 0; c < N_CH; c++) begin
      mc[c] = WGT_W'($urandom); ms[c] = WGT_W'($urandom);
      wr(REG_WCOS0 + 2 * c, int'(mc[c]));
      wr(REG_WCOS0 + 2 * c + 1, int'(ms[c]));
    end
    @(negedge clk);
    for (int c = 0; c < N_CH; c++) begin
      check("cos out", w_cos[c], mc[c]);
      check("sin out", w_sin[c], ms[c]);
      chk_rd("cos rd", REG_WCOS0 + 2 * c, mc[c]);
      chk_rd("sin rd", REG_WCOS0 + 2 * c + 1, ms[c]);
    end
    // coefficients
    for (int t = 0; t < N_TAPS; t++) begin
      mk[t] = COEF_W'($urandom);
      wr('h40 + t, int'(mk[t]));
    end
    @(negedge clk);
    for (int t = 0; t < N_TAPS; t++) begin
      check("coef out", coef[t], mk[t]);
      chk_rd("coef rd", 'h40 + t, mk[t]);
    end
    // control registers
    wr('h10, 3);  check("window", win_lsb, 3);  chk_rd("window rd", 'h10, 3);
    wr('h11, 1);  check("src", src_sel, 1);     chk_rd("src rd", 'h11, 1);
    wr('h13, 17); check("caplen", cap_len, 17); chk_rd("caplen rd", 'h13, 17);
    wr('h14, 200); check("stim words", stim_words, 200); chk_rd("stim words rd", 'h14, 200);
    cap_busy = 1; chk_rd("busy rd", 'h12, 1);
    cap_busy = 0; chk_rd("idle rd", 'h12, 0);
    check("no pulse yet", pulses, 0);
    wr('h12, 1);
    @(negedge clk);
    check("one start pulse", pulses, 1);
    chk_rd("unmapped rd", 'h020, 0);
    // stimulus writes
    for (int k = 0; k < 20; k++) begin
      int ch, i, d;
      ch = $urandom_range(0, N_CH - 1);
      i  = $urandom_range(0, STIM_LEN - 1);
      d  = $urandom_range(0, 4095);
      @(negedge clk);
      cfg_we = 1; cfg_addr = CFG_AW'(REG_STIM0 + ch * STIM_LEN + i); cfg_wdata = CFG_DW'(d);
      @(negedge clk);
      cfg_we = 0;
      check("stim we", stim_we, 1);
      check("stim ch", stim_ch, ch);
      check("stim addr", stim_addr, i);
      check("stim data", longint'({20'd0, stim_data}), d);
      @(negedge clk);
      check("stim we pulse", stim_we, 0);
    end
    // writes elsewhere leave the weights alone
    wr('h020, 5);
    for (int c = 0; c < N_CH; c++) check("cos kept", w_cos[c], mc[c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

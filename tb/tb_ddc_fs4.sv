// tb_ddc_fs4: self-checking test of the fs/4 complex down-converter.
//
// Random beam samples (with the most negative and most positive codes mixed
// in) are fed with gaps in the valid flag. The reference evaluates the
// paper's equations I'[n] = Re cos(pi n/2) + Im sin(pi n/2) and
// Q'[n] = -Re sin(pi n/2) + Im cos(pi n/2) literally, with the sample index
// n counted over valid words only, and saturates the one result that does
// not fit in 20 bits. Latency of one clock is checked.
module tb_ddc_fs4;
  localparam int N_PAR = 8, W = 20;
  localparam longint MAXV = (64'sd1 <<< (W-1)) - 1;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [W-1:0] re [N_PAR], im [N_PAR], i_o [N_PAR], q_o [N_PAR];
  int checks = 0, failures = 0;
  longint n = 0;
  longint ei [N_PAR], eq [N_PAR];
  int cs, sn;

  ddc_fs4 dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat(longint v);
    return (v > MAXV) ? MAXV : v;
  endfunction

  function automatic logic signed [W-1:0] pick(int k);
    case (k % 6)
      0: return {1'b1, {(W-1){1'b0}}};
      1: return {1'b0, {(W-1){1'b1}}};
      default: return W'($urandom);
    endcase
  endfunction

  initial begin
    for (int p = 0; p < N_PAR; p++) begin re[p] = '0; im[p] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int p = 0; p < N_PAR; p++) begin
        re[p] = (it < 12) ? pick(it + p) : W'($urandom);
        im[p] = (it < 12) ? pick(it + p + 1) : W'($urandom);
        cs = ((n + p) % 4 == 0) ? 1 : ((n + p) % 4 == 2) ? -1 : 0;
        sn = ((n + p) % 4 == 1) ? 1 : ((n + p) % 4 == 3) ? -1 : 0;
        ei[p] = sat(longint'(re[p]) * cs + longint'(im[p]) * sn);
        eq[p] = sat(-longint'(re[p]) * sn + longint'(im[p]) * cs);
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid !== in_valid) begin failures++; $display("valid mismatch"); end
      if (in_valid) begin
        n += N_PAR;
        for (int p = 0; p < N_PAR; p++) begin
          checks++;
          if (longint'(i_o[p]) != ei[p] || longint'(q_o[p]) != eq[p]) begin
            failures++;
            if (failures < 10) $display("it=%0d p=%0d I=%0d/%0d Q=%0d/%0d", it, p, i_o[p], ei[p], q_o[p], eq[p]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

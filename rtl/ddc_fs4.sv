// ddc_fs4: complex down-conversion of the beam by a quarter of the sample rate.
//
// With fs = 4*f_IF (1.6 GHz and 400 MHz) the oscillator samples are
// cos(pi n/2) = 1,0,-1,0 and sin(pi n/2) = 0,1,0,-1, so
//   I'[n] =  Re(y[n]) cos(pi n/2) + Im(y[n]) sin(pi n/2)
//   Q'[n] = -Re(y[n]) sin(pi n/2) + Im(y[n]) cos(pi n/2)
// reduces, for n mod 4 = 0,1,2,3, to
//   (I',Q') = (Re, Im), (Im, -Re), (-Re, -Im), (-Im, Re).
// No multiplier is used: each output is a selected input, possibly negated.
// Negation saturates the most negative code (-2^(W-1) -> 2^(W-1)-1) so the
// output stays W bits wide.
//
// The sample index n of lane p in word k is n = k*N_PAR + p. A 2-bit phase
// counter holds (k*N_PAR) mod 4 and advances on every valid word; with the
// paper's N_PAR = 8 it stays 0 and each lane has a fixed phase p mod 4.
//
// Interface: re/im are the beamformer's real and imaginary lanes, lane 0 the
// oldest sample. Timing: one register stage (the paper's 8 x 2 x 20 = 320
// registers of this stage), out_valid follows in_valid by one clock.
//
// From the paper: the fs/4 sequences, the I'/Q' equations (Fig. 11, Eqs.
// 11-12), 8 lanes of 20 bits at 200 MHz and a multiplier-free design. Own
// choices: saturation of the negated most negative code, phase counter and
// reset to phase 0, the valid flag.
module ddc_fs4 #(
  parameter int N_PAR = dbf_pkg::N_PAR,
  parameter int W     = dbf_pkg::BF_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] re  [N_PAR],
  input  logic signed [W-1:0] im  [N_PAR],
  output logic                out_valid,
  output logic signed [W-1:0] i_o [N_PAR],
  output logic signed [W-1:0] q_o [N_PAR]
);
  localparam logic signed [W-1:0] MIN_V = {1'b1, {(W-1){1'b0}}};
  localparam logic signed [W-1:0] MAX_V = {1'b0, {(W-1){1'b1}}};
  localparam logic [1:0]          STEP  = 2'(N_PAR % 4);

  function automatic logic signed [W-1:0] neg_sat(input logic signed [W-1:0] x);
    return (x == MIN_V) ? MAX_V : -x;
  endfunction

  logic [1:0]          phase;          // (sample index of lane 0) mod 4
  logic [1:0]          ph;
  logic signed [W-1:0] i_n [N_PAR];
  logic signed [W-1:0] q_n [N_PAR];

  always_comb begin
    ph = '0;
    for (int p = 0; p < N_PAR; p++) begin
      ph = phase + 2'(p);
      unique case (ph)
        2'd0:    begin i_n[p] = re[p];          q_n[p] = im[p];          end
        2'd1:    begin i_n[p] = im[p];          q_n[p] = neg_sat(re[p]); end
        2'd2:    begin i_n[p] = neg_sat(re[p]); q_n[p] = neg_sat(im[p]); end
        default: begin i_n[p] = neg_sat(im[p]); q_n[p] = re[p];          end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= '0;
      out_valid <= 1'b0;
      for (int p = 0; p < N_PAR; p++) begin
        i_o[p] <= '0;
        q_o[p] <= '0;
      end
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        phase <= phase + STEP;
        for (int p = 0; p < N_PAR; p++) begin
          i_o[p] <= i_n[p];
          q_o[p] <= q_n[p];
        end
      end
    end
  end

endmodule

// fir_lpf: 14-tap FIR low-pass filter for the received I/Q stream.
//
// Suppresses noise and interference outside the LoRa channel before the
// samples are buffered. Samples arrive at 4 MS/s, one every 16 clocks, so a
// single multiply-accumulate per rail is reused over the taps: when a new
// sample arrives it enters a 14-deep delay line, then the block spends TAPS
// clocks accumulating coef[k] * x[n-k] for I and for Q, rounds, shifts
// right by 15 and saturates to 13 bits. out_valid pulses TAPS+2 (16) clocks
// after in_valid; in_valid must be at least TAPS+2 clocks apart.
// The tap count is the paper's. The coefficients are this design's: a
// Hamming-windowed sinc, h[n] = 2 fc sinc(2 fc (n - 6.5)) (0.54 - 0.46
// cos(2 pi n / 13)), fc = 300 kHz / 4 MS/s, scaled so that the taps sum to
// 2^15 (unity gain at DC) and rounded.
module fir_lpf
  import tinysdr_pkg::*;
#(
  parameter int unsigned TAPS = 14
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  iq_sample_t in,
  output logic       out_valid,
  output iq_sample_t out
);
  localparam int unsigned CW = 16;
  localparam int unsigned AW = IQ_W + CW + 4;
  localparam logic signed [CW-1:0] COEF [14] = '{
    16'sd12, 16'sd158, 16'sd662, 16'sd1729, 16'sd3255, 16'sd4797, 16'sd5771,
    16'sd5771, 16'sd4797, 16'sd3255, 16'sd1729, 16'sd662, 16'sd158, 16'sd12};

  iq_sample_t dl [TAPS];
  logic [$clog2(TAPS+1)-1:0] k;
  logic busy;
  logic signed [AW-1:0] acc_i, acc_q;

  function automatic iq_t sat(logic signed [AW-1:0] a);
    logic signed [AW-1:0] r;
    r = (a + (AW'(1) <<< 14)) >>> 15;
    if (r > AW'(4095))       return 13'sd4095;
    else if (r < -AW'(4096)) return -13'sd4096;
    else                     return r[IQ_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int j = 0; j < TAPS; j++) dl[j] <= '0;
      k <= '0; busy <= 1'b0; acc_i <= '0; acc_q <= '0;
      out_valid <= 1'b0; out <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        dl[0] <= in;
        for (int j = 1; j < TAPS; j++) dl[j] <= dl[j-1];
        k <= '0; busy <= 1'b1; acc_i <= '0; acc_q <= '0;
      end else if (busy) begin
        acc_i <= acc_i + AW'(dl[k].i * COEF[k % 14]);
        acc_q <= acc_q + AW'(dl[k].q * COEF[k % 14]);
        if (k == TAPS-1) busy <= 1'b0;
        k <= k + 1'b1;
      end else if (k == TAPS) begin
        out_valid <= 1'b1;
        out.i <= sat(acc_i);
        out.q <= sat(acc_q);
        k <= '0;
      end
    end
endmodule

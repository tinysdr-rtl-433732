// gfsk_modulator: Gaussian frequency shift keying for BLE at 1 Mb/s.
//
// Each bit becomes SPS = 4 samples (4 MS/s) of +1 or -1. The upsampled
// stream passes an 8-tap Gaussian filter (bandwidth-time product 0.5),
// whose output is the instantaneous frequency; a phase accumulator
// integrates it and the cosine/sine tables turn the phase into I and Q.
// With the taps summing to 256 and the frequency scaled by 2^20, a long
// run of ones advances the phase by 2^28 per sample, i.e. +250 kHz at
// 4 MS/s: modulation index 0.5. Interface: on every `tick` (sample strobe)
// the filter and phase advance; `bit_req` pulses in the tick that takes a
// new bit from `din` (every 4th tick); I/Q are valid one clock after tick.
// When `en` is low the history is cleared and the phase holds.
// Upsampling, Gaussian filter, integration and sine/cosine follow the
// paper; the tap values, BT = 0.5 and h = 0.5 (within the paper's
// 0.45-0.55) are this design's. Taps: g[k] = exp(-(pi t / a)^2),
// a = sqrt(ln 2 / 2) / BT, t = (k - 5.5) / 4 bit periods, k = 0..11,
// scaled to sum 256; the four outer taps round to 0 or 1 and only the
// centre 8 are kept.
module gfsk_modulator
  import tinysdr_pkg::*;
#(
  parameter int unsigned SPS = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic tick,
  input  logic din,
  output logic bit_req,
  output logic valid,
  output iq_t  i_o,
  output iq_t  q_o
);
  localparam int unsigned NT = 8;
  localparam logic [7:0] G [NT] = '{8'd1, 8'd6, 8'd35, 8'd86, 8'd86, 8'd35, 8'd6, 8'd1};

  logic [NT-1:0]  hist;        // upsampled NRZ history, 1 = +1
  logic [$clog2(SPS)-1:0] sub;
  logic           cur_bit;
  logic signed [10:0] freq;
  logic [31:0]    phase;

  assign bit_req = en && tick && (sub == '0);

  always_comb begin
    freq = '0;
    for (int k = 0; k < NT; k++)
      freq = hist[k] ? freq + 11'(G[k]) : freq - 11'(G[k]);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      hist <= 8'b01010101; sub <= '0; cur_bit <= 1'b0; phase <= '0;
    end else if (!en) begin
      hist <= 8'b01010101; sub <= '0;
    end else if (tick) begin
      sub     <= (sub == $clog2(SPS)'(SPS-1)) ? '0 : sub + 1'b1;
      if (sub == '0) cur_bit <= din;
      hist    <= {hist[NT-2:0], (sub == '0) ? din : cur_bit};
      phase   <= phase + 32'(signed'(freq) <<< 20);
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) valid <= 1'b0;
    else        valid <= en && tick;

  sincos_lut u_lut (.clk, .en(en && tick), .phase(phase), .cos_o(i_o), .sin_o(q_o));
endmodule

// symbol_detector: peak search over FFT output to decide a LoRa symbol.
//
// The demodulator transforms every received symbol twice: first after
// multiplying it by a downchirp (an upchirp turns into a tone at its symbol
// value), then after multiplying it by an upchirp (a downchirp turns into a
// tone). The FFT bins of each pass arrive in natural order, bin 0 first,
// 2^SF bins per pass. For each pass the detector computes re^2 + im^2 of
// every bin and keeps the largest value and its bin index. After the second
// pass it reports the symbol: the bin of the first pass's peak and
// is_down = 0 if that peak is at least as high as the second pass's, else
// the bin of the second pass's peak and is_down = 1.
// Interface: `start` clears the state and latches sf; `sym_valid` pulses
// one clock after the last bin of the second pass.
// Peak search and the up/down comparison follow the paper; the magnitude
// measure and the order of the passes are this design's.
module symbol_detector
  import tinysdr_pkg::*;
#(
  parameter int unsigned IN_W = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  sf_t                    sf,
  input  logic                   fft_valid,
  input  logic signed [IN_W-1:0] fft_re,
  input  logic signed [IN_W-1:0] fft_im,
  output logic                   sym_valid,
  output logic [11:0]            sym,
  output logic                   is_down,
  output logic [2*IN_W:0]        peak_mag
);
  localparam int unsigned MW = 2 * IN_W + 1;
  logic [MW-1:0] mag, best_mag, first_mag;
  logic [11:0]   bin, best_bin, first_bin, last_bin;
  logic          pass;
  sf_t           sf_q;

  assign mag      = MW'(fft_re * fft_re) + MW'(fft_im * fft_im);
  assign last_bin = 12'((32'd1 << sf_q) - 1);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      bin <= '0; best_bin <= '0; best_mag <= '0; first_bin <= '0; first_mag <= '0;
      pass <= 1'b0; sf_q <= 4'd7; sym_valid <= 1'b0; sym <= '0; is_down <= 1'b0; peak_mag <= '0;
    end else begin
      sym_valid <= 1'b0;
      if (start) begin
        bin <= '0; best_mag <= '0; best_bin <= '0; pass <= 1'b0; sf_q <= sf;
      end else if (fft_valid) begin
        // strict > keeps the lowest bin on a tie
        if (bin == '0 || mag > best_mag) begin
          best_mag <= mag; best_bin <= bin;
        end
        if (bin == last_bin) begin
          bin <= '0;
          if (!pass) begin
            pass      <= 1'b1;
            first_bin <= (bin == '0 || mag > best_mag) ? bin : best_bin;
            first_mag <= (bin == '0 || mag > best_mag) ? mag : best_mag;
          end else begin
            pass      <= 1'b0;
            sym_valid <= 1'b1;
            if (first_mag >= ((mag > best_mag) ? mag : best_mag)) begin
              sym <= first_bin; is_down <= 1'b0; peak_mag <= first_mag;
            end else begin
              sym <= (mag > best_mag) ? bin : best_bin; is_down <= 1'b1;
              peak_mag <= (mag > best_mag) ? mag : best_mag;
            end
          end
        end else begin
          bin <= bin + 1'b1;
        end
      end
    end
endmodule

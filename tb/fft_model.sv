// fft_model: behavioural stand-in for the vendor FFT core (testbench only).
//
// Collects one frame of 2^log2_size complex inputs (in_last marks the final
// one), computes the discrete Fourier transform X[k] = sum x[n] e^{-j2pi kn/N}
// in real arithmetic, and streams the N bins out in natural order, one per
// clock, starting LATENCY clocks after the last input (or after the previous
// frame's output, if that is later). Outputs are rounded
// to OUT_W-bit integers without scaling.
module fft_model #(
  parameter int IN_W = 16,
  parameter int OUT_W = 32,
  parameter int LATENCY = 8
) (
  input  logic                    clk,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_re,
  input  logic signed [IN_W-1:0]  in_im,
  input  logic                    in_last,
  input  logic [3:0]              log2_size,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_re,
  output logic signed [OUT_W-1:0] out_im
);
  real xr [4096], xi [4096];
  int  n_in = 0;
  int  frames = 0;
  int  streaming = 0;   // number of the frame now being output

  initial begin out_valid = 0; out_re = 0; out_im = 0; end

  // output queue: one entry per bin, with the clock count at which it is sent
  real     qr [$], qi [$];
  longint  qt [$];
  longint  cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (qt.size() != 0 && qt[0] <= cyc) begin
      out_valid <= 1'b1;
      out_re <= OUT_W'($rtoi(qr[0]));
      out_im <= OUT_W'($rtoi(qi[0]));
      void'(qr.pop_front()); void'(qi.pop_front()); void'(qt.pop_front());
    end else out_valid <= 1'b0;
    if (in_valid) begin
      xr[n_in] = real'(in_re);
      xi[n_in] = real'(in_im);
      n_in++;
      if (in_last) begin
        automatic int N = 1 << log2_size;
        automatic longint t0 = cyc + LATENCY;
        if (qt.size() != 0 && qt[$] >= t0) t0 = qt[$] + 1;
        if (n_in != N) $display("fft_model: frame of %0d samples, expected %0d", n_in, N);
        for (int k = 0; k < N; k++) begin
          real sr, si, a;
          sr = 0; si = 0;
          for (int m = 0; m < N; m++) begin
            a = -2.0 * 3.14159265358979 * real'((k * m) % N) / real'(N);
            sr += xr[m] * $cos(a) - xi[m] * $sin(a);
            si += xr[m] * $sin(a) + xi[m] * $cos(a);
          end
          qr.push_back(sr); qi.push_back(si); qt.push_back(t0 + k);
        end
        n_in = 0;
        frames++;
      end
    end
  end
endmodule

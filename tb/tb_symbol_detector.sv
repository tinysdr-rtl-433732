// tb_symbol_detector: feeds pairs of synthetic spectra (noise plus one
// peak in either the first or the second pass) and checks the reported
// bin and chirp type, and that a result appears exactly once per pair.
module automatic tb_symbol_detector;
  import tinysdr_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, fft_valid = 0, sym_valid, is_down;
  sf_t sf;
  logic signed [31:0] fft_re, fft_im;
  logic [11:0] sym;
  logic [64:0] peak_mag;
  int checks = 0, failures = 0, results = 0;
  symbol_detector dut (.clk, .rst_n, .start, .sf, .fft_valid, .fft_re, .fft_im, .sym_valid, .sym, .is_down, .peak_mag);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (sym_valid) results++;

  task automatic frame(int N, int pk, int amp);
    for (int k = 0; k < N; k++) begin
      @(posedge clk); fft_valid <= 1;
      fft_re <= (k == pk) ? amp : int'($urandom % 200) - 100;
      fft_im <= (k == pk) ? -amp : int'($urandom % 200) - 100;
    end
    @(posedge clk); fft_valid <= 0;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int f = 6 + (t % 7), N = 1 << f, s = $urandom % N, dn = $urandom % 2, r0;
      @(posedge clk); start <= 1; sf <= sf_t'(f); @(posedge clk); start <= 0;
      r0 = results;
      frame(N, dn ? -1 : s, 50000);
      frame(N, dn ? s : (s + 3) % N, dn ? 50000 : 20000);
      @(posedge clk); #1;
      checks++; if (results != r0 + 1) begin failures++; $display("result count"); end
      checks++; if (sym != 12'(s) || is_down != dn[0]) begin failures++; $display("sf %0d s %0d dn %0d -> %0d %0d", f, s, dn, sym, is_down); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

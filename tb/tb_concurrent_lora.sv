// tb_concurrent_lora: concurrent reception of two overlapping LoRa
// transmissions with two demodulator lanes (N_DEMOD = 2).
//
// The testbench plays the radio: it adds two LoRa chirp streams sample by
// sample and sends the sum, as serial LVDS words, into the receiver.
// Stream A is SF 7 at 125 kHz (32 samples per chip), stream B is SF 8 at
// 250 kHz (16 samples per chip); both have 4096-sample symbols but chirp
// slopes (BW^2 / 2^SF) that differ by a factor of two, so each is spread
// over all bins when dechirped with the other's reference. Lane 0 is set
// to A's configuration and lane 1 to B's over SPI. The first symbol of
// each stream is 0 and gives the lane's timing offset t; each later
// window must return that stream's symbol value + t (within one bin) and
// no window may be flagged as a downchirp. The chirps are computed here
// with real arithmetic (frequency rising linearly over the band, phase
// its running sum). Two lanes in parallel on one sample stream are how
// TinySDR demonstrates concurrent reception; the rest is this test's own.
module automatic tb_concurrent_lora;
  import tinysdr_pkg::*;
  localparam int NSYM = 6;

  logic clk = 0, rst_n = 0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic rxd = 0, txd, txclk, sd_sclk, sd_mosi, sd_cs_n;
  logic        fin_v [2], fin_last [2], fout_v [2], sym_valid [2], sym_is_down [2];
  logic signed [15:0] fin_re [2], fin_im [2];
  logic signed [31:0] fout_re [2], fout_im [2];
  sf_t         fft_log2 [2];
  logic [11:0] sym [2];
  int checks = 0, failures = 0;

  tinysdr_fpga_top #(.N_DEMOD(2)) dut (
    .clk, .rst_n, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso),
    .rxd, .txd, .txclk, .sd_sclk, .sd_mosi, .sd_miso(1'b0), .sd_cs_n,
    .fft_in_valid(fin_v), .fft_in_re(fin_re), .fft_in_im(fin_im), .fft_in_last(fin_last),
    .fft_log2_size(fft_log2),
    .fft_out_valid(fout_v), .fft_out_re(fout_re), .fft_out_im(fout_im),
    .sym_valid, .sym, .sym_is_down);

  for (genvar l = 0; l < 2; l++) begin : g_fft
    fft_model fft (.clk, .in_valid(fin_v[l] && rst_n), .in_re(fin_re[l]), .in_im(fin_im[l]),
      .in_last(fin_last[l]), .log2_size(fft_log2[l]),
      .out_valid(fout_v[l]), .out_re(fout_re[l]), .out_im(fout_im[l]));
  end

  always #5 clk = ~clk;
  initial begin
    #100000000;
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // MCU side: SPI mode-0 register writes
  task automatic xfer(input logic [7:0] tx);
    for (int b = 7; b >= 0; b--) begin mosi = tx[b]; #80; sclk = 1; #80; sclk = 0; end
  endtask
  task automatic spi_write(input logic [6:0] a, input logic [7:0] d);
    cs_n = 0; #80; xfer({1'b1, a}); xfer(d); #80 cs_n = 1; #200;
  endtask

  // radio side: word player
  logic [31:0] play_q [$];
  bit playing = 0;
  initial begin : player
    logic [31:0] w;
    forever begin
      if (playing && play_q.size() != 0) w = play_q.pop_front();
      else w = {I_SYNC, 13'd0, 1'b0, Q_SYNC, 13'd0, 1'b0};
      for (int b = 31; b >= 0; b--) begin @(clk); #1 rxd = w[b]; end
    end
  end

  int got [2][$]; bit got_down [2][$];
  always @(posedge clk) if (rst_n)
    for (int l = 0; l < 2; l++)
      if (sym_valid[l]) begin got[l].push_back(int'(sym[l])); got_down[l].push_back(sym_is_down[l]); end

  initial begin
    int sf [2] = '{7, 8};
    int d  [2] = '{32, 16};
    int val [2][NSYM];
    real ph [2] = '{0.0, 0.0};
    for (int s = 0; s < 2; s++)
      for (int k = 0; k < NSYM; k++) val[s][k] = (k == 0) ? 0 : int'($urandom % (1 << sf[s]));
    // the summed stream: NSYM symbols of 4096 samples, then one idle symbol
    for (int n = 0; n < (NSYM + 1) * 4096; n++) begin
      real si = 0.0, sq = 0.0;
      for (int s = 0; s < 2; s++) begin
        int ms = (1 << sf[s]) * d[s];
        if (n < NSYM * 4096) begin
          int k = n / ms, r = n % ms;
          real f = (real'((r + val[s][k] * d[s]) % ms) / real'(ms) - 0.5) / real'(d[s]);
          si += 2000.0 * $cos(2.0 * 3.14159265358979 * ph[s]);
          sq += 2000.0 * $sin(2.0 * 3.14159265358979 * ph[s]);
          ph[s] += f;
        end
      end
      play_q.push_back(pack_word('{i: iq_t'($rtoi(si)), q: iq_t'($rtoi(sq))}, 1'b0, 1'b0));
    end

    repeat (4) @(posedge clk); rst_n = 1; #100;
    spi_write(7'h10, 8'd7); spi_write(7'h11, 8'd5);     // lane 0: SF 7, 125 kHz
    spi_write(7'h14, 8'd8); spi_write(7'h15, 8'd4);     // lane 1: SF 8, 250 kHz
    spi_write(7'h0D, 8'(NSYM)); spi_write(7'h0E, 8'd0);
    spi_write(7'h00, 8'h02);                             // LoRa RX
    repeat (16 * 40) @(posedge clk);
    checks++; if (!dut.locked) begin failures++; $display("receiver not locked"); end
    spi_write(7'h00, 8'h82);                             // start both lanes
    playing = 1;
    while (dut.rx_busy) @(posedge clk);
    repeat (100) @(posedge clk);

    for (int l = 0; l < 2; l++) begin
      int n = 1 << sf[l];
      checks++;
      if (got[l].size() != NSYM) begin failures++; $display("lane %0d: %0d symbols", l, got[l].size()); end
      else for (int k = 1; k < NSYM; k++) begin
        int e = (val[l][k] + got[l][0]) % n;
        checks++;
        if (got_down[l][k] || (got[l][k] - e + n + 1) % n > 2) begin
          failures++; $display("lane %0d window %0d: %0d expected %0d", l, k, got[l][k], e);
        end
      end
      $display("lane %0d: offset %0d, symbols %p", l, got[l].size() ? got[l][0] : -1, got[l]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

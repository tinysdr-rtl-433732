// tb_tinysdr_fpga_top: end-to-end test of the whole baseband design at its
// default sizes (126 kB sample buffer, one demodulator lane).
//
// The testbench plays the MCU (an SPI mode-0 master), the I/Q radio and
// the vendor FFT core (behavioural DFT model). It runs three operations:
//  1. LoRa TX: configures SF 7, 125 kHz bandwidth (2^5 samples per chip),
//     a 10-symbol preamble, two sync symbols and a random 4-byte payload,
//     starts the packet and records the serial LVDS words the design sends
//     to the radio (both edges of the 64 MHz clock).
//  2. LoRa RX: switches to receive mode and plays the recorded words back
//     into the LVDS receiver, as a radio in loopback would, after a run of
//     idle words on which the receiver must lock. The demodulator then
//     reads the packet out of the sample buffer. The first preamble window
//     gives the receiver's timing offset t (in bins); every later preamble
//     window must give t, the sync windows sync + t, the two full
//     downchirp windows must be flagged as downchirps, and, because the
//     quarter downchirp shifts the symbol grid by 2^SF / 4 chips, data
//     window j must give d_j - 2^SF / 4 + t (within one bin, as these
//     windows straddle two symbols), with d_j worked out here from the
//     payload (CRC-16/XMODEM, bytes cut into SF-bit values LSB first).
//  3. BLE TX: loads a 20-byte advertising PDU, sends it on channel 37 and
//     demodulates the recorded GFSK samples here (sign of the phase step at
//     the middle of each bit); the bits must equal preamble, access
//     address, and the whitened PDU and CRC-24 computed independently.
//  4. microSD: selects the card, sends three bytes to a card model on the
//     SPI-mode card port and reads back what the card answered (its first
//     answer 0xA5, then the inverse of the byte it received last).
// The status and symbol registers are read back over SPI. Each mechanism
// (LoRa packet sent, lock, symbols demodulated, downchirps detected, BLE
// packet sent, mode switch, register read, card byte) is counted and must
// occur.
module automatic tb_tinysdr_fpga_top;
  import tinysdr_pkg::*;
  localparam int SF = 7, OS = 5, N = 1 << SF, PAY = 4;

  logic clk = 0, rst_n = 0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic rxd = 0, txd, txclk;
  logic sd_sclk, sd_mosi, sd_miso, sd_cs_n;
  logic        fin_v [1], fin_last [1], fout_v [1], sym_valid [1], sym_is_down [1];
  logic signed [15:0] fin_re [1], fin_im [1];
  logic signed [31:0] fout_re [1], fout_im [1];
  sf_t         fft_log2 [1];
  logic [11:0] sym [1];

  int checks = 0, failures = 0;
  int n_lora_tx = 0, n_ble_tx = 0, n_lock = 0, n_syms = 0, n_down = 0, n_mode = 0, n_reads = 0, n_sd = 0;

  tinysdr_fpga_top dut (
    .clk, .rst_n, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso),
    .rxd, .txd, .txclk, .sd_sclk, .sd_mosi, .sd_miso, .sd_cs_n,
    .fft_in_valid(fin_v), .fft_in_re(fin_re), .fft_in_im(fin_im), .fft_in_last(fin_last),
    .fft_log2_size(fft_log2),
    .fft_out_valid(fout_v), .fft_out_re(fout_re), .fft_out_im(fout_im),
    .sym_valid, .sym, .sym_is_down);

  fft_model fft (.clk, .in_valid(fin_v[0] && rst_n), .in_re(fin_re[0]), .in_im(fin_im[0]),
    .in_last(fin_last[0]), .log2_size(fft_log2[0]),
    .out_valid(fout_v[0]), .out_re(fout_re[0]), .out_im(fout_im[0]));

  always #5 clk = ~clk;
  initial begin
    #400000000;
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- MCU: SPI master ----------------
  task automatic xfer(input logic [7:0] tx, output logic [7:0] rx);
    for (int b = 7; b >= 0; b--) begin
      mosi = tx[b]; #80; sclk = 1; rx[b] = miso; #80; sclk = 0;
    end
  endtask
  // microSD card model (SPI mode 0): shifts mosi in on rising sclk edges,
  // drives its answer byte on miso MSB first, advancing on falling edges
  logic [7:0] card_tx = 8'hA5, card_rx = 0;
  int card_bit = 0;
  assign sd_miso = card_tx[7 - (card_bit & 7)];
  always @(posedge sd_sclk) if (!sd_cs_n) card_rx = {card_rx[6:0], sd_mosi};
  always @(negedge sd_sclk) if (!sd_cs_n) begin
    card_bit++;
    if (card_bit % 8 == 0) card_tx = ~card_rx;
  end

  task automatic spi_write(input logic [6:0] a, input logic [7:0] d);
    logic [7:0] rx;
    cs_n = 0; #80; xfer({1'b1, a}, rx); xfer(d, rx); #80 cs_n = 1; #200;
    if (a == 7'h00) n_mode++;
  endtask
  task automatic spi_read(input logic [6:0] a, output logic [7:0] d);
    logic [7:0] rx;
    cs_n = 0; #80; xfer({1'b0, a}, rx); xfer(8'h00, d); #80 cs_n = 1; #200;
    n_reads++;
  endtask

  // ---------------- radio: LVDS transmit capture ----------------
  bit tx_bits [$];
  bit recording = 0;
  always @(clk) begin
    #1 if (recording) tx_bits.push_back(txd);
  end

  // split the recorded bit stream into 32-bit words at the phase where every
  // word carries both sync fields
  task automatic to_words(output logic [31:0] words [$]);
    int ph = -1;
    words.delete();
    for (int p = 0; p < 32 && ph < 0; p++) begin
      bit ok = 1;
      for (int w = 0; (w + 1) * 32 + p <= tx_bits.size(); w++) begin
        int b = w * 32 + p;
        if (!(tx_bits[b] && !tx_bits[b+1] && !tx_bits[b+16] && tx_bits[b+17])) ok = 0;
      end
      if (ok) ph = p;
    end
    checks++;
    if (ph < 0) begin failures++; $display("no word alignment in the transmitted stream"); return; end
    for (int w = 0; (w + 1) * 32 + ph <= tx_bits.size(); w++) begin
      logic [31:0] x;
      for (int k = 0; k < 32; k++) x[31-k] = tx_bits[w * 32 + ph + k];
      words.push_back(x);
    end
  endtask

  // ---------------- radio: LVDS receive playback ----------------
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

  // ---------------- counters ----------------
  logic was_locked = 0;
  int got_sym [$]; bit got_down [$];
  always @(posedge clk) if (rst_n) begin
    if (dut.locked && !was_locked) n_lock++;
    was_locked = dut.locked;
    if (sym_valid[0]) begin
      got_sym.push_back(int'(sym[0])); got_down.push_back(sym_is_down[0]);
      n_syms++; if (sym_is_down[0]) n_down++;
    end
  end

  // ---------------- reference models ----------------
  function automatic logic [15:0] crc16(logic [7:0] d [$]);
    logic [15:0] c = 16'h0000;
    foreach (d[k]) begin
      c ^= {d[k], 8'h00};
      for (int b = 0; b < 8; b++) c = c[15] ? (c << 1) ^ 16'h1021 : c << 1;
    end
    return c;
  endfunction
  function automatic logic [23:0] rev24(logic [23:0] x);
    for (int k = 0; k < 24; k++) rev24[k] = x[23-k];
  endfunction

  // ---------------- test sequence ----------------
  initial begin
    logic [7:0] r8;
    logic [7:0] pay [$];
    logic [7:0] frame [$];
    logic [31:0] words [$];
    int data_syms [$];
    int t, first, nwin;

    repeat (4) @(posedge clk); rst_n = 1; #100;

    // ---- 1. LoRa transmit ----
    for (int k = 0; k < PAY; k++) pay.push_back(8'($urandom));
    spi_write(7'h01, 8'(SF));
    spi_write(7'h02, 8'(OS));
    spi_write(7'h03, 8'd10);
    spi_write(7'h04, 8'd24);
    spi_write(7'h05, 8'd32);
    spi_write(7'h06, 8'(PAY));
    spi_write(7'h07, 8'd0);
    foreach (pay[k]) spi_write(7'h08, pay[k]);
    spi_read(7'h01, r8);
    checks++; if (r8 != 8'(SF)) begin failures++; $display("tx_sf reads %h", r8); end
    spi_write(7'h00, 8'h01);                     // mode LoRa TX
    repeat (64) @(posedge clk);
    recording = 1;
    repeat (64) @(posedge clk);
    spi_write(7'h00, 8'h81);                     // start
    spi_read(7'h00, r8);
    checks++; if (r8[4] != 1'b1 || r8[1:0] != 2'd1) begin failures++; $display("status during TX %h", r8); end
    while (dut.lora_busy) @(posedge clk);
    n_lora_tx++;
    repeat (N * 32 * 16) @(posedge clk);         // one more symbol of idle words
    recording = 0;
    to_words(words);

    // expected data symbols
    frame.push_back(8'(PAY));
    foreach (pay[k]) frame.push_back(pay[k]);
    begin
      logic [15:0] c = crc16(pay);
      frame.push_back(c[7:0]); frame.push_back(c[15:8]);
    end
    begin
      int nb = frame.size() * 8;
      for (int s = 0; s * SF < nb; s++) begin
        int v = 0;
        for (int k = 0; k < SF; k++)
          if (s * SF + k < nb && frame[(s * SF + k) / 8][(s * SF + k) % 8]) v |= 1 << k;
        data_syms.push_back(v);
      end
    end

    // the packet starts with the first word that carries a non-zero sample
    first = -1;
    foreach (words[k]) if (first < 0 && (words[k][29:17] != 0 || words[k][13:1] != 0)) first = k;
    checks++;
    if (first < 0) begin failures++; $display("no LoRa samples transmitted"); end
    else begin
      int exp_len = (12 * N * 32) + (2 * N * 32) + (N * 32 / 4) + data_syms.size() * N * 32;
      int last = first;
      foreach (words[k]) if (words[k][29:17] != 0 || words[k][13:1] != 0) last = k;
      // packet duration in 4 MS/s samples (last chirp sample may be near zero)
      checks++;
      if (last - first + 1 > exp_len || last - first + 1 < exp_len - 2) begin
        failures++; $display("LoRa packet lasts %0d samples, expected %0d", last - first + 1, exp_len);
      end
    end

    // ---- 2. LoRa receive of the recorded packet ----
    nwin = 14 + data_syms.size();
    spi_write(7'h10, 8'(SF));
    spi_write(7'h11, 8'(OS));
    spi_write(7'h0D, 8'(nwin));
    spi_write(7'h0E, 8'd0);
    spi_write(7'h00, 8'h02);                     // mode LoRa RX
    repeat (16 * 40) @(posedge clk);             // idle words: receiver locks
    checks++; if (!dut.locked) begin failures++; $display("receiver not locked"); end
    for (int k = first; k < words.size(); k++) play_q.push_back(words[k]);
    spi_write(7'h00, 8'h82);                     // start capture and demodulation
    playing = 1;
    while (dut.rx_busy) @(posedge clk);
    repeat (100) @(posedge clk);
    checks++;
    if (got_sym.size() != nwin) begin failures++; $display("%0d symbols, expected %0d", got_sym.size(), nwin); end
    else begin
      t = got_sym[0];
      for (int w = 0; w < nwin; w++) begin
        int e; bit ed = 0;
        if (w < 10) e = t;
        else if (w == 10) e = (24 + t) % N;
        else if (w == 11) e = (32 + t) % N;
        else if (w < 14) begin e = -1; ed = 1; end
        else e = (data_syms[w - 14] - N / 4 + t + N) % N;
        checks++;
        // data windows hold 3/4 of one symbol and 1/4 of the one before, so
        // their peak may land one bin either side
        if (got_down[w] != ed || (e >= 0 && w < 14 && got_sym[w] != e)
            || (w >= 14 && (got_sym[w] - e + N + 1) % N > 2)) begin
          failures++; $display("window %0d: %0d/%0d expected %0d/%0d", w, got_sym[w], got_down[w], e, ed);
        end
      end
    end
    spi_read(7'h30, r8);
    checks++; if (r8 != 8'(nwin)) begin failures++; $display("symbol count register %0d", r8); end
    spi_read(7'h12, r8);
    checks++; if (got_sym.size() != 0 && r8 != 8'(got_sym[$])) begin failures++; $display("last symbol register %0d", r8); end
    playing = 0;

    // ---- 3. BLE beacon ----
    begin
      logic [7:0] pdu [20];
      bit expect_b [$];
      bit ok = 0;
      logic [23:0] r;
      int p;
      int is [$], qs [$];
      pdu[0] = 8'h42; pdu[1] = 8'd18;
      for (int k = 2; k < 20; k++) pdu[k] = 8'($urandom);
      spi_write(7'h09, 8'd37);
      spi_write(7'h0A, 8'd20);
      spi_write(7'h0B, 8'd0);
      for (int k = 0; k < 20; k++) spi_write(7'h0C, pdu[k]);
      spi_write(7'h00, 8'h03);                   // mode BLE TX
      tx_bits.delete();
      recording = 1;
      repeat (64) @(posedge clk);
      spi_write(7'h00, 8'h83);
      #1000;
      while (dut.ble_busy) @(posedge clk);
      n_ble_tx++;
      repeat (16 * 40) @(posedge clk);
      recording = 0;
      to_words(words);
      foreach (words[k]) begin
        is.push_back(int'(signed'(words[k][29:17]))); qs.push_back(int'(signed'(words[k][13:1])));
      end
      // expected bits: preamble, access address, whitened PDU and CRC
      for (int b = 0; b < 8; b++) expect_b.push_back(8'hAA >> b & 1);
      for (int b = 0; b < 32; b++) expect_b.push_back(32'h8E89BED6 >> b & 1);
      r = rev24(24'h555555);
      p = 1 | (1 << 1) | (1 << 4) | (1 << 6);   // whitening register, channel 37
      begin
        bit body [$];
        for (int k = 0; k < 20; k++) for (int b = 0; b < 8; b++) begin
          bit x = pdu[k][b];
          body.push_back(x);
          if (r[0] ^ x) r = (r >> 1) ^ 24'hDA6000; else r = r >> 1;
        end
        for (int b = 23; b >= 0; b--) body.push_back(rev24(r)[b]);
        foreach (body[k]) begin
          bit o = (p >> 6) & 1;
          expect_b.push_back(body[k] ^ o);
          p = ((p << 1) & 8'h7F) | o; if (o) p ^= 8'h10;
        end
      end
      // sign of the phase step between samples -> bits, at every offset
      for (int s0 = 1; s0 + 4 * expect_b.size() < is.size() && !ok; s0++) begin
        bit m = 1;
        for (int b = 0; b < expect_b.size() && m; b++) begin
          int k = s0 + 4 * b;
          longint cr = longint'(is[k-1]) * qs[k] - longint'(qs[k-1]) * is[k];
          if ((cr > 0) != expect_b[b]) m = 0;
        end
        if (m) ok = 1;
      end
      checks++; if (!ok) begin failures++; $display("BLE bits not found in the GFSK output"); end
    end

    // microSD card: select, three bytes, deselect
    begin
      logic [7:0] expect_rx = 8'hA5;
      spi_write(7'h3A, 8'h01);
      checks++; if (sd_cs_n) begin failures++; $display("card not selected"); end
      for (int k = 0; k < 3; k++) begin
        logic [7:0] b = 8'($urandom);
        spi_write(7'h3B, b);
        spi_read(7'h3A, r8);
        checks++; if (r8 != 8'h01) begin failures++; $display("card status %h", r8); end
        spi_read(7'h3B, r8);
        checks++; if (r8 != expect_rx || card_rx != b) begin
          failures++; $display("card byte: sent %h card got %h, read %h expected %h", b, card_rx, r8, expect_rx);
        end else n_sd++;
        expect_rx = ~b;
      end
      spi_write(7'h3A, 8'h00);
      checks++; if (!sd_cs_n) begin failures++; $display("card still selected"); end
    end

    spi_write(7'h00, 8'h00);                     // back to idle
    spi_read(7'h00, r8);
    checks++; if (r8[1:0] != 2'd0) begin failures++; $display("mode reads %h", r8); end

    // every mechanism must have happened
    $display("LoRa packets sent %0d, BLE packets sent %0d, locks %0d, symbols %0d, downchirps %0d, mode writes %0d, register reads %0d, card bytes %0d",
             n_lora_tx, n_ble_tx, n_lock, n_syms, n_down, n_mode, n_reads, n_sd);
    checks++; if (n_lora_tx == 0) failures++;
    checks++; if (n_ble_tx == 0) failures++;
    checks++; if (n_lock == 0) failures++;
    checks++; if (n_syms == 0) failures++;
    checks++; if (n_down == 0) failures++;
    checks++; if (n_mode < 4) failures++;
    checks++; if (n_reads == 0) failures++;
    checks++; if (n_sd == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

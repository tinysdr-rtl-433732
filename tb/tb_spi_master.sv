// tb_spi_master: moves 200 random bytes through the SPI master to a card
// model and back. The card model samples mosi on sclk rising edges and
// presents its own byte on miso, MSB first, advancing on falling edges
// (SPI mode 0). Checks per byte: the card received tx_byte, rx_byte is the
// card's byte, `done` comes exactly 16 clocks (16 * HALF) after `start`,
// and sclk gave exactly 8 rising edges. A start while busy must be ignored.
module automatic tb_spi_master;
  logic clk = 0, rst_n = 0, start = 0, miso, busy, done, sclk, mosi;
  logic [7:0] tx_byte = 0, rx_byte;
  int checks = 0, failures = 0;
  spi_master dut (.clk, .rst_n, .start, .tx_byte, .busy, .done, .rx_byte, .sclk, .mosi, .miso);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // card model
  logic [7:0] card_tx = 0, card_rx = 0;
  int card_bit = 0, rises = 0;
  assign miso = card_tx[7 - (card_bit & 7)];
  always @(posedge sclk) begin card_rx = {card_rx[6:0], mosi}; rises++; end
  always @(negedge sclk) card_bit++;

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [7:0] b = 8'($urandom);
      int n = 0;
      card_tx = 8'($urandom); card_bit = 0; rises = 0;
      @(posedge clk); start <= 1; tx_byte <= b;
      @(posedge clk); start <= 0;
      // a second start during the transfer must not disturb it
      if (t % 10 == 0) begin @(posedge clk); start <= 1; tx_byte <= ~b; @(posedge clk); start <= 0; n = 2; end
      while (!done) begin @(posedge clk); n++; end
      #1;
      checks++; if (card_rx != b) begin failures++; $display("card got %h sent %h", card_rx, b); end
      checks++; if (rx_byte != card_tx) begin failures++; $display("rx %h card %h", rx_byte, card_tx); end
      // done is registered at the 16th edge after the one that took start,
      // so it is first seen high when sampled at the 17th
      checks++; if (n != 17) begin failures++; $display("done after %0d clocks", n); end
      checks++; if (rises != 8) begin failures++; $display("%0d rising edges", rises); end
      checks++; if (busy || sclk) begin failures++; $display("busy/sclk after done"); end
      repeat ($urandom % 3) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// spi_slave: register access from the MCU over SPI.
//
// The MCU is the SPI master (mode 0: sclk idles low, data sampled on the
// rising edge, MSB first). A transaction, framed by cs_n low, is two bytes:
// a command byte {write, addr[6:0]} and a data byte. For a write, the block
// pulses `wr_en` with `addr` and `wr_data` after the data byte. For a read,
// it pulses `rd_en` with `addr` after the command byte; the register file
// must return `rd_data` on the next clock, and it is shifted out on miso
// during the data byte. sclk, cs_n and mosi are synchronised into the
// 64 MHz clock with two flip-flops each, so sclk must stay below about
// clk / 8. Further bytes in the same frame repeat the access at addr + 1
// (burst access, used to fill packet memories).
// The paper says only that the MCU talks to the FPGA over SPI; the frame
// format and register-file handshake are this design's.
module spi_slave (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sclk,
  input  logic       cs_n,
  input  logic       mosi,
  output logic       miso,
  output logic       wr_en,
  output logic       rd_en,
  output logic [6:0] addr,
  output logic [7:0] wr_data,
  input  logic [7:0] rd_data
);
  logic [2:0] sclk_s, cs_s;
  logic [1:0] mosi_s;
  logic       rise, fall, active;
  logic [2:0] bitcnt;
  logic [7:0] sh_in, sh_out;
  logic       have_cmd, is_write, rd_pend;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      sclk_s <= '0; cs_s <= '1; mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], sclk};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[0], mosi};
    end

  assign rise   = (sclk_s[2:1] == 2'b01);
  assign fall   = (sclk_s[2:1] == 2'b10);
  assign active = !cs_s[1];
  assign miso   = sh_out[7];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      bitcnt <= '0; sh_in <= '0; sh_out <= '0; have_cmd <= 1'b0; is_write <= 1'b0;
      addr <= '0; wr_data <= '0; wr_en <= 1'b0; rd_en <= 1'b0; rd_pend <= 1'b0;
    end else begin
      wr_en   <= 1'b0;
      rd_en   <= 1'b0;
      rd_pend <= rd_en;
      if (rd_pend) sh_out <= rd_data;
      if (!active) begin
        bitcnt <= '0; have_cmd <= 1'b0;
      end else begin
        if (rise) begin
          sh_in  <= {sh_in[6:0], mosi_s[1]};
          bitcnt <= bitcnt + 1'b1;
          if (bitcnt == 3'd7) begin
            if (!have_cmd) begin
              have_cmd <= 1'b1;
              is_write <= sh_in[6];
              addr     <= {sh_in[5:0], mosi_s[1]};
              if (!sh_in[6]) rd_en <= 1'b1;
            end else if (is_write) begin
              wr_data <= {sh_in[6:0], mosi_s[1]};
              wr_en   <= 1'b1;
            end
          end
        end
        if (fall && bitcnt != 3'd0) sh_out <= {sh_out[6:0], 1'b0};
        // after each data byte of a burst move to the next address
        if (wr_en && have_cmd) addr <= addr + 1'b1;
        if (rise && bitcnt == 3'd7 && have_cmd && !is_write) begin
          addr  <= addr + 1'b1;
          rd_en <= 1'b1;
        end
      end
    end
endmodule

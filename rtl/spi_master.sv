// spi_master: SPI-mode byte engine for the microSD card.
//
// The card is run in its 1-bit SPI mode, not the 4-bit native SD mode,
// as in the TinySDR design, which chose SPI mode to reuse one simple SPI
// block. This block moves one byte per `start`: it shifts `tx_byte` out on
// `mosi` MSB first and at the same time collects the card's `miso` bits
// into `rx_byte`. SPI mode 0: sclk idles low, mosi changes on the falling
// edge (and is valid before the first rising edge), miso is sampled on the
// rising edge. Each sclk half period lasts HALF clocks, so a byte takes
// 16 * HALF clocks; `done` pulses for one clock with `rx_byte` valid at
// the end of the eighth high phase. `start` is ignored while `busy`.
//
// At the default HALF = 1 and a 64 MHz clock, sclk is 32 MHz, i.e.
// 32 Mb/s. The design this follows writes 104 Mb/s (4 MS/s of 26-bit
// samples) to the card in real time, which needs an SPI clock above this
// single 64 MHz domain; that rate is not reached here. Chip select, the SD
// command set (CMD0, CMD24/25 block writes, CRC, data tokens) and the
// choice of what to write are left to the controller driving this block
// (the MCU through registers in the top level); those are this design's
// choices, not given by the original.
module spi_master #(
  parameter int unsigned HALF = 1   // clocks per sclk half period
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] tx_byte,
  output logic       busy,
  output logic       done,
  output logic [7:0] rx_byte,
  output logic       sclk,
  output logic       mosi,
  input  logic       miso
);
  localparam int unsigned DW = (HALF > 1) ? $clog2(HALF) : 1;

  logic [DW-1:0] div;
  logic [2:0]    nbit;
  logic [7:0]    sh, rx;

  assign mosi = sh[7];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rx_byte <= '0; sclk <= 1'b0;
      div <= '0; nbit <= '0; sh <= '0; rx <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; sh <= tx_byte; div <= '0; nbit <= '0; sclk <= 1'b0;
        end
      end else if (div != DW'(HALF - 1)) begin
        div <= div + 1'b1;
      end else begin
        div <= '0;
        if (!sclk) begin                  // rising edge: sample the card
          sclk <= 1'b1;
          rx   <= {rx[6:0], miso};
        end else begin                    // falling edge: next bit out
          sclk <= 1'b0;
          nbit <= nbit + 1'b1;
          sh   <= {sh[6:0], 1'b0};
          if (nbit == 3'd7) begin
            busy    <= 1'b0;
            done    <= 1'b1;
            rx_byte <= rx;
          end
        end
      end
    end

  // sclk stays low whenever no byte is being moved
  assert property (@(posedge clk) disable iff (!rst_n) !busy |-> !sclk);
endmodule

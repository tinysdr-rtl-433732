// tinysdr_fpga_top: the baseband FPGA design of a low-power IoT SDR node.
//
// The FPGA sits between the MCU (control over SPI) and the I/Q radio
// (serial LVDS at 64 MHz double data rate, 4 MS/s of 13-bit I/Q). It
// holds three signal paths, one of which is active at a time (`mode`):
//   LoRa TX  packet generator -> chirp generator -> I/Q serializer
//   BLE TX   packet generator (CRC, whitening) -> GFSK modulator -> serializer
//   LoRa RX  I/Q deserializer -> 14-tap low-pass FIR -> decimator -> sample
//            buffer (memory controller + SRAM) -> demodulator (dechirp,
//            FFT, symbol detector), N_DEMOD of them side by side
// The FFT is a vendor core; its ports per demodulator lane are brought
// out of this module. Everything runs on one 64 MHz clock `clk` (the PLL
// output); the 4 MS/s sample instants are strobes from a clock divider.
// The receive path is clocked by the same clock: the radio's receive clock
// is assumed to be this clock.
//
// Register map (SPI: command byte {write, addr[6:0]}, then data):
//   0x00 W  bits[1:0] mode (0 idle, 1 LoRa TX, 2 LoRa RX, 3 BLE TX),
//           bit 7 start (self-clearing); R status
//           {lock, rx busy, ble busy, lora tx busy, 2'b0, mode}
//   0x01 TX spreading factor      0x02 TX log2(4 MS/s / BW)
//   0x03 preamble length          0x04 / 0x05 sync symbol 0 / 1
//   0x06 LoRa payload length      0x07 LoRa payload address pointer
//   0x08 LoRa payload data (writes at pointer, pointer + 1)
//   0x09 BLE channel index        0x0A BLE PDU length
//   0x0B BLE PDU address pointer  0x0C BLE PDU data (auto increment)
//   0x0D / 0x0E number of symbols to demodulate, low / high byte
//   0x10 + 4l  lane l RX spreading factor
//   0x11 + 4l  lane l RX log2 decimation (= log2(4 MS/s / BW))
//   0x12 + 4l  R lane l last symbol [7:0]
//   0x13 + 4l  R lane l {is_down, 3'b0, last symbol [11:8]}
//   0x30 + l   R lane l number of symbols demodulated (mod 256)
//   0x38 R sample buffer overflow count (lane 0, low byte)
//   0x3A microSD chip select: W bit 0 = 1 selects the card (sd_cs_n low);
//        R {SPI busy, 6'b0, selected}
//   0x3B microSD byte: W sends the byte over SPI; R last byte received
// The split into these blocks follows the paper's block diagrams; the
// register map, mode encoding and the single clock are this design's.
module tinysdr_fpga_top
  import tinysdr_pkg::*;
#(
  parameter int unsigned BUF_DEPTH   = 39699,  // 126 kB of 26-bit words
  parameter int unsigned N_DEMOD     = 1,
  parameter int unsigned FFT_IN_W    = 16,
  parameter int unsigned FFT_OUT_W   = 32,
  parameter int unsigned MAX_PAYLOAD = 255
) (
  input  logic clk,          // 64 MHz
  input  logic rst_n,
  // MCU SPI
  input  logic spi_sclk,
  input  logic spi_cs_n,
  input  logic spi_mosi,
  output logic spi_miso,
  // radio LVDS (single-ended view of the differential pairs)
  input  logic rxd,
  output logic txd,
  output logic txclk,
  // microSD card, SPI mode
  output logic sd_sclk,
  output logic sd_mosi,
  input  logic sd_miso,
  output logic sd_cs_n,
  // FFT core, one per demodulator lane
  output logic                        fft_in_valid  [N_DEMOD],
  output logic signed [FFT_IN_W-1:0]  fft_in_re     [N_DEMOD],
  output logic signed [FFT_IN_W-1:0]  fft_in_im     [N_DEMOD],
  output logic                        fft_in_last   [N_DEMOD],
  output sf_t                         fft_log2_size [N_DEMOD],
  input  logic                        fft_out_valid [N_DEMOD],
  input  logic signed [FFT_OUT_W-1:0] fft_out_re    [N_DEMOD],
  input  logic signed [FFT_OUT_W-1:0] fft_out_im    [N_DEMOD],
  // demodulated symbols
  output logic                        sym_valid     [N_DEMOD],
  output logic [11:0]                 sym           [N_DEMOD],
  output logic                        sym_is_down   [N_DEMOD]
);
  localparam int unsigned LANE_DEPTH = BUF_DEPTH / N_DEMOD;
  localparam int unsigned AW = $clog2(LANE_DEPTH);
  localparam int unsigned CW = $clog2(LANE_DEPTH + 1);

  // ---------------- registers ----------------
  logic       wr_en, rd_en;
  logic [6:0] addr;
  logic [7:0] wr_data, rd_data;
  mode_t      mode;
  logic       start;
  sf_t        tx_sf;
  logic [3:0] tx_os;
  logic [7:0] pre_len, sync0, sync1, pay_len, pay_ptr;
  logic [5:0] ble_ch, ble_len, ble_ptr;
  logic [15:0] n_symbols;
  sf_t        rx_sf [N_DEMOD];
  logic [3:0] rx_os [N_DEMOD];
  logic [11:0] last_sym [N_DEMOD];
  logic       last_down [N_DEMOD];
  logic [7:0] sym_count [N_DEMOD];
  logic [15:0] overflows [N_DEMOD];
  logic       lora_busy, ble_busy, rx_busy, locked;
  logic       demod_busy [N_DEMOD];
  logic       sd_busy;
  logic [7:0] sd_rx;

  spi_slave u_spi (
    .clk, .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .wr_en, .rd_en, .addr, .wr_data, .rd_data);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      mode <= MODE_IDLE; start <= 1'b0; tx_sf <= 4'd8; tx_os <= 4'd5; pre_len <= 8'd10;
      sync0 <= 8'd0; sync1 <= 8'd0; pay_len <= '0; pay_ptr <= '0;
      ble_ch <= 6'd37; ble_len <= 6'd2; ble_ptr <= '0; n_symbols <= '0; sd_cs_n <= 1'b1;
      for (int l = 0; l < N_DEMOD; l++) begin rx_sf[l] <= 4'd8; rx_os[l] <= 4'd5; end
    end else begin
      start <= 1'b0;
      if (wr_en) begin
        case (addr) inside
          7'h00: begin mode <= mode_t'(wr_data[1:0]); start <= wr_data[7]; end
          7'h01: tx_sf   <= wr_data[3:0];
          7'h02: tx_os   <= wr_data[3:0];
          7'h03: pre_len <= wr_data;
          7'h04: sync0   <= wr_data;
          7'h05: sync1   <= wr_data;
          7'h06: pay_len <= wr_data;
          7'h07: pay_ptr <= wr_data;
          7'h08: pay_ptr <= pay_ptr + 1'b1;
          7'h09: ble_ch  <= wr_data[5:0];
          7'h0A: ble_len <= wr_data[5:0];
          7'h0B: ble_ptr <= wr_data[5:0];
          7'h0C: ble_ptr <= ble_ptr + 1'b1;
          7'h0D: n_symbols[7:0]  <= wr_data;
          7'h0E: n_symbols[15:8] <= wr_data;
          [7'h10:7'h2F]: for (int l = 0; l < N_DEMOD; l++) begin
            if (addr == 7'(7'h10 + 4 * l)) rx_sf[l] <= wr_data[3:0];
            if (addr == 7'(7'h11 + 4 * l)) rx_os[l] <= wr_data[3:0];
          end
          7'h3A: sd_cs_n <= ~wr_data[0];
          default: ;
        endcase
      end
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_data <= '0;
    else if (rd_en) begin
      rd_data <= '0;
      case (addr) inside
        7'h00: rd_data <= {locked, rx_busy, ble_busy, lora_busy, 2'b00, mode};
        7'h01: rd_data <= {4'd0, tx_sf};
        7'h02: rd_data <= {4'd0, tx_os};
        7'h03: rd_data <= pre_len;
        7'h06: rd_data <= pay_len;
        7'h38: rd_data <= overflows[0][7:0];
        7'h3A: rd_data <= {sd_busy, 6'd0, ~sd_cs_n};
        7'h3B: rd_data <= sd_rx;
        default:
          for (int l = 0; l < N_DEMOD; l++) begin
            if (addr == 7'(7'h10 + 4 * l)) rd_data <= {4'd0, rx_sf[l]};
            if (addr == 7'(7'h11 + 4 * l)) rd_data <= {4'd0, rx_os[l]};
            if (addr == 7'(7'h12 + 4 * l)) rd_data <= last_sym[l][7:0];
            if (addr == 7'(7'h13 + 4 * l)) rd_data <= {last_down[l], 3'd0, last_sym[l][11:8]};
            if (addr == 7'(7'h30 + l))     rd_data <= sym_count[l];
          end
      endcase
    end

  // ---------------- microSD card (SPI mode) ----------------
  // The MCU moves bytes to and from the card through registers 0x3A/0x3B
  // and runs the SD command protocol itself.
  spi_master u_sd (
    .clk, .rst_n, .start(wr_en && addr == 7'h3B), .tx_byte(wr_data), .busy(sd_busy),
    .done(), .rx_byte(sd_rx), .sclk(sd_sclk), .mosi(sd_mosi), .miso(sd_miso));

  // ---------------- sample clock ----------------
  logic tick;
  clock_divider #(.DIV(16)) u_div (.clk, .rst_n, .tick);

  // ---------------- LoRa transmitter ----------------
  logic        lt_step, lt_load, lt_down;
  logic [11:0] lt_sym;
  sf_t         lt_sf;
  logic [3:0]  lt_os;
  iq_t         lt_i, lt_q;
  logic        lt_valid;

  lora_packet_generator #(.MAX_PAYLOAD(MAX_PAYLOAD)) u_lora_pg (
    .clk, .rst_n, .sf(tx_sf), .os_log2(tx_os), .preamble_len(pre_len),
    .sync_sym0({4'd0, sync0}), .sync_sym1({4'd0, sync1}), .payload_len(pay_len),
    .wr_en(wr_en && addr == 7'h08), .wr_addr(pay_ptr), .wr_data(wr_data),
    .start(start && mode == MODE_LORA_TX), .tick(tick && mode == MODE_LORA_TX),
    .busy(lora_busy), .step(lt_step), .load(lt_load), .sym(lt_sym), .down(lt_down),
    .sf_o(lt_sf), .os_o(lt_os));

  chirp_generator u_lora_chirp (
    .clk, .rst_n, .step(lt_step), .load(lt_load), .clr_phase(1'b0), .sym(lt_sym),
    .down(lt_down), .sf(lt_sf), .os_log2(lt_os), .valid(lt_valid), .i_o(lt_i), .q_o(lt_q));

  // ---------------- BLE beacon transmitter ----------------
  logic ble_bit, ble_req, ble_valid, ble_en;
  logic [3:0] ble_tail;
  iq_t  ble_i, ble_q;

  // the Gaussian filter delays each bit by about one bit period: keep the
  // modulator running for two more bits (8 samples) after the last bit
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ble_tail <= '0;
    else if (ble_busy) ble_tail <= 4'd8;
    else if (tick && ble_tail != '0) ble_tail <= ble_tail - 1'b1;
  assign ble_en = ble_busy || (ble_tail != '0);

  ble_packet_generator u_ble_pg (
    .clk, .rst_n, .wr_en(wr_en && addr == 7'h0C), .wr_addr(ble_ptr), .wr_data(wr_data),
    .channel(ble_ch), .pdu_len(ble_len), .start(start && mode == MODE_BLE_TX),
    .bit_req(ble_req), .dout(ble_bit), .busy(ble_busy));

  gfsk_modulator u_gfsk (
    .clk, .rst_n, .en(ble_en), .tick(tick), .din(ble_bit), .bit_req(ble_req),
    .valid(ble_valid), .i_o(ble_i), .q_o(ble_q));

  // ---------------- transmit mux and serializer ----------------
  iq_sample_t tx_s;
  logic       ser_load;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) tx_s <= '0;
    else if (mode == MODE_LORA_TX && lt_valid)  tx_s <= '{i: lt_i,  q: lt_q};
    else if (mode == MODE_BLE_TX  && ble_valid) tx_s <= '{i: ble_i, q: ble_q};
    else if (!lora_busy && !ble_en && tick)     tx_s <= '0;

  iq_serializer u_ser (
    .clk, .rst_n, .en(mode == MODE_LORA_TX || mode == MODE_BLE_TX), .sample(tx_s),
    .ctrl_i(1'b0), .ctrl_q(1'b0), .load(ser_load), .txd, .txclk);

  // ---------------- receiver front ----------------
  iq_sample_t des_s, flt_s;
  logic       des_valid, flt_valid;
  logic [1:0] des_ctrl;

  iq_deserializer u_des (
    .clk, .rst_n, .rxd, .sample(des_s), .ctrl(des_ctrl), .valid(des_valid), .locked(locked));

  fir_lpf u_fir (
    .clk, .rst_n, .in_valid(des_valid && mode == MODE_LORA_RX), .in(des_s),
    .out_valid(flt_valid), .out(flt_s));

  // ---------------- demodulator lanes ----------------
  logic rx_start;
  assign rx_start = start && mode == MODE_LORA_RX;

  for (genvar l = 0; l < N_DEMOD; l++) begin : g_lane
    logic [8:0]    dec_cnt;
    logic          keep;
    logic          rd_req, adv, full;
    logic [AW-1:0] rd_offset;
    logic [CW-1:0] adv_count, count;
    iq_sample_t    rd_data_l;
    logic          ram_we, ram_re;
    logic [AW-1:0] ram_waddr, ram_raddr;
    logic [25:0]   ram_wdata, ram_rdata;
    logic          capturing;

    // keep one filtered sample out of 2^rx_os (one sample per chip)
    assign keep = flt_valid && capturing && (dec_cnt == '0);
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        dec_cnt <= '0; capturing <= 1'b0;
      end else begin
        if (rx_start) begin
          dec_cnt <= '0; capturing <= 1'b1;
        end else begin
          if (mode != MODE_LORA_RX) capturing <= 1'b0;
          if (flt_valid && capturing)
            dec_cnt <= (dec_cnt == 9'((32'd1 << rx_os[l]) - 1)) ? '0 : dec_cnt + 1'b1;
        end
      end

    memory_controller #(.DEPTH(LANE_DEPTH), .WIDTH(26)) u_mc (
      .clk, .rst_n, .clear(rx_start), .wr_valid(keep), .wr_data(flt_s),
      .rd_req, .rd_offset, .rd_data(rd_data_l), .adv, .adv_count, .count, .full,
      .overflows(overflows[l]),
      .ram_we, .ram_waddr, .ram_wdata, .ram_re, .ram_raddr, .ram_rdata);

    sample_sram #(.DEPTH(LANE_DEPTH), .WIDTH(26)) u_sram (
      .clk, .we(ram_we), .waddr(ram_waddr), .wdata(ram_wdata),
      .re(ram_re), .raddr(ram_raddr), .rdata(ram_rdata));

    lora_demodulator #(.DEPTH(LANE_DEPTH), .FFT_IN_W(FFT_IN_W), .FFT_OUT_W(FFT_OUT_W)) u_demod (
      .clk, .rst_n, .start(rx_start), .sf(rx_sf[l]), .n_symbols(n_symbols), .busy(demod_busy[l]),
      .rd_req, .rd_offset, .rd_data(rd_data_l), .adv, .adv_count, .count,
      .fft_in_valid(fft_in_valid[l]), .fft_in_re(fft_in_re[l]), .fft_in_im(fft_in_im[l]),
      .fft_in_last(fft_in_last[l]), .fft_log2_size(fft_log2_size[l]),
      .fft_out_valid(fft_out_valid[l]), .fft_out_re(fft_out_re[l]), .fft_out_im(fft_out_im[l]),
      .sym_valid(sym_valid[l]), .sym(sym[l]), .sym_is_down(sym_is_down[l]));

    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        last_sym[l] <= '0; last_down[l] <= 1'b0; sym_count[l] <= '0;
      end else if (rx_start) begin
        sym_count[l] <= '0;
      end else if (sym_valid[l]) begin
        last_sym[l] <= sym[l]; last_down[l] <= sym_is_down[l]; sym_count[l] <= sym_count[l] + 1'b1;
      end
  end

  always_comb begin
    rx_busy = 1'b0;
    for (int l = 0; l < N_DEMOD; l++) rx_busy |= demod_busy[l];
  end
endmodule

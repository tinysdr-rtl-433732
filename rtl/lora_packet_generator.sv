// lora_packet_generator: turns a LoRa packet into a sequence of chirp symbols.
//
// A packet on air is: PREAMBLE upchirps of value 0, two sync upchirps,
// two and a quarter downchirps, then the data symbols. The data are the
// bytes {length, payload[0..length-1], crc[7:0], crc[15:8]}, cut into
// SF-bit symbol values, least significant bit first, with the last symbol
// padded with zeros; each value is the cyclic shift of an upchirp.
// After `start` the block first computes the CRC over the payload (one byte
// per clock), then drives the chirp generator: on every sample strobe
// `tick` it asserts `step`, and on the first sample of each symbol also
// `load` with the symbol's value and direction. A symbol lasts
// 2^(SF + os_log2) samples (os_log2 = log2(4 MS/s / BW)); the last
// downchirp lasts a quarter of that. `busy` falls after the last sample.
// The payload comes from a byte memory written through wr_en/wr_addr/wr_data
// (by the MCU, or preloaded for fixed packets).
// The frame layout of preamble, sync, 2.25 downchirps, header, payload and
// CRC, and the SF/BW parameters follow the paper. The paper gives no
// header contents, coding or CRC definition: here the header is the one
// length byte, no forward error correction, whitening, interleaving or
// Gray mapping is applied, and the CRC is CRC-16/XMODEM (polynomial
// 0x1021, initial value 0, MSB-first over each byte). The sync symbol
// values are inputs.
module lora_packet_generator
  import tinysdr_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD = 255
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration, sampled at start
  input  sf_t         sf,
  input  logic [3:0]  os_log2,
  input  logic [7:0]  preamble_len,
  input  logic [11:0] sync_sym0,
  input  logic [11:0] sync_sym1,
  input  logic [7:0]  payload_len,
  // payload memory write port
  input  logic        wr_en,
  input  logic [7:0]  wr_addr,
  input  logic [7:0]  wr_data,
  // control
  input  logic        start,
  input  logic        tick,       // 4 MS/s sample strobe
  output logic        busy,
  // to the chirp generator
  output logic        step,
  output logic        load,
  output logic [11:0] sym,
  output logic        down,
  output sf_t         sf_o,
  output logic [3:0]  os_o
);
  typedef enum logic [2:0] {G_IDLE, G_CRC, G_PRE, G_SYNC, G_DOWN, G_DATA} seg_t;

  logic [7:0]  pay [MAX_PAYLOAD];
  seg_t        seg;
  sf_t         sf_q;
  logic [3:0]  os_q;
  logic [7:0]  pre_q, len_q;
  logic [11:0] sync0_q, sync1_q;
  logic [15:0] crc;
  logic [7:0]  crc_idx;
  logic [7:0]  sym_cnt;       // symbol index within a segment
  logic [11:0] data_sym_cnt;  // data symbols still to send
  logic [21:0] samp;          // sample index within a symbol
  logic [21:0] sym_len;       // samples in the current symbol
  logic [12:0] bitpos;        // first frame bit of the current data symbol
  logic [11:0] data_val;

  always_ff @(posedge clk)
    if (wr_en && wr_addr < 8'(MAX_PAYLOAD)) pay[wr_addr] <= wr_data;

  function automatic logic [15:0] crc16_byte(logic [15:0] c, logic [7:0] d);
    for (int b = 7; b >= 0; b--) begin
      logic fb;
      fb = c[15] ^ d[b];
      c  = {c[14:0], 1'b0} ^ (fb ? 16'h1021 : 16'h0000);
    end
    return c;
  endfunction

  // byte k of the frame {len, payload, crc lo, crc hi}
  function automatic logic [7:0] frame_byte(logic [8:0] k);
    if (k == 9'd0)                          return len_q;
    else if (k <= 9'(len_q))                return pay[8'(k - 9'd1)];
    else if (k == 9'(len_q) + 9'd1)         return crc[7:0];
    else if (k == 9'(len_q) + 9'd2)         return crc[15:8];
    else                                    return 8'h00;
  endfunction

  // SF bits starting at bitpos, LSB first, from three consecutive bytes
  logic [23:0] three;
  always_comb begin
    three = {frame_byte(9'(bitpos[12:3]) + 9'd2), frame_byte(9'(bitpos[12:3]) + 9'd1),
             frame_byte(9'(bitpos[12:3]))};
    data_val = 12'((three >> bitpos[2:0]) & ((24'd1 << sf_q) - 24'd1));
  end

  logic [21:0] full_len;
  assign full_len = 22'd1 << (sf_q + os_q);
  assign busy  = (seg != G_IDLE);
  assign step  = tick && (seg inside {G_PRE, G_SYNC, G_DOWN, G_DATA});
  assign load  = step && (samp == '0);
  assign sf_o  = sf_q;
  assign os_o  = os_q;

  always_comb begin
    sym  = '0;
    down = 1'b0;
    case (seg)
      G_SYNC: sym = (sym_cnt == 8'd0) ? sync0_q : sync1_q;
      G_DOWN: down = 1'b1;
      G_DATA: sym = data_val;
      default: ;
    endcase
  end

  assign sym_len = (seg == G_DOWN && sym_cnt == 8'd2) ? (full_len >> 2) : full_len;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      seg <= G_IDLE; sf_q <= 4'd7; os_q <= '0; pre_q <= '0; len_q <= '0;
      sync0_q <= '0; sync1_q <= '0; crc <= '0; crc_idx <= '0; sym_cnt <= '0;
      data_sym_cnt <= '0; samp <= '0; bitpos <= '0;
    end else begin
      case (seg)
        G_IDLE: if (start) begin
          sf_q <= sf; os_q <= os_log2; pre_q <= preamble_len; len_q <= payload_len;
          sync0_q <= sync_sym0; sync1_q <= sync_sym1;
          crc <= 16'h0000; crc_idx <= '0; seg <= G_CRC;
        end
        G_CRC: begin
          if (crc_idx == len_q) begin
            seg <= (pre_q == '0) ? G_SYNC : G_PRE;
            sym_cnt <= '0; samp <= '0; bitpos <= '0;
            // ceil(8 * (len + 3) / SF) data symbols
            data_sym_cnt <= 12'(((32'(len_q) + 32'd3) * 32'd8 + 32'(sf_q) - 32'd1) / 32'(sf_q));
          end else begin
            crc <= crc16_byte(crc, pay[crc_idx]);
            crc_idx <= crc_idx + 1'b1;
          end
        end
        default: if (step) begin
          if (samp == sym_len - 1'b1) begin
            samp <= '0;
            sym_cnt <= sym_cnt + 1'b1;
            case (seg)
              G_PRE:  if (sym_cnt == pre_q - 1'b1) begin seg <= G_SYNC; sym_cnt <= '0; end
              G_SYNC: if (sym_cnt == 8'd1)         begin seg <= G_DOWN; sym_cnt <= '0; end
              G_DOWN: if (sym_cnt == 8'd2)         begin seg <= G_DATA; sym_cnt <= '0; end
              G_DATA: begin
                bitpos <= bitpos + 13'(sf_q);
                data_sym_cnt <= data_sym_cnt - 1'b1;
                if (data_sym_cnt == 12'd1) seg <= G_IDLE;
              end
              default: seg <= G_IDLE;
            endcase
          end else samp <= samp + 1'b1;
        end
      endcase
    end
endmodule

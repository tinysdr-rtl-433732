// ble_packet_generator: bit stream of a BLE non-connectable advertisement.
//
// Sends, in order: the preamble byte 0xAA, the advertising access address
// 0x8E89BED6, the PDU bytes held in a small memory (2-byte header with the
// length, then advertiser address and data, written by the MCU), and the
// 24-bit CRC. Bytes and the access address go least significant bit first,
// the CRC from bit 23 down. The CRC is computed over the PDU bits as they
// go out; PDU and CRC bits are whitened with the channel's sequence.
// Interface: `start` (with `channel`, `pdu_len` = 2..39 bytes) seeds the
// CRC and whitening registers; from then on `dout` is the current bit and
// each `bit_req` (from the GFSK modulator, 1 Mb/s) moves to the next bit.
// `busy` falls after the last CRC bit has been taken.
// The packet fields, CRC and whitening follow the paper; the memory, the
// handshake and the bit counter structure are this design's.
module ble_packet_generator #(
  parameter int unsigned MAX_PDU = 39
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wr_en,
  input  logic [5:0] wr_addr,
  input  logic [7:0] wr_data,
  input  logic [5:0] channel,
  input  logic [5:0] pdu_len,
  input  logic       start,
  input  logic       bit_req,
  output logic       dout,
  output logic       busy
);
  localparam logic [7:0]  PREAMBLE = 8'hAA;
  localparam logic [31:0] ACCESS_ADDR = 32'h8E89BED6;

  typedef enum logic [2:0] {B_IDLE, B_PRE, B_AA, B_PDU, B_CRC} seg_t;
  seg_t        seg;
  logic [7:0]  pdu [MAX_PDU];
  logic [8:0]  bcnt;       // bit index inside the segment
  logic [5:0]  len_q;
  logic        raw, crc_en, wh_en, wh_out, seeding;
  logic [23:0] crc;

  always_ff @(posedge clk)
    if (wr_en && wr_addr < 6'(MAX_PDU)) pdu[wr_addr] <= wr_data;

  assign busy    = (seg != B_IDLE);
  assign seeding = start && (seg == B_IDLE);

  always_comb begin
    raw = 1'b0;
    case (seg)
      B_PRE: raw = PREAMBLE[bcnt[2:0]];
      B_AA:  raw = ACCESS_ADDR[bcnt[4:0]];
      B_PDU: raw = pdu[6'(bcnt[8:3])][bcnt[2:0]];
      B_CRC: raw = crc[5'd23 - bcnt[4:0]];
      default: ;
    endcase
  end

  assign crc_en = bit_req && (seg == B_PDU);
  assign wh_en  = bit_req && (seg == B_PDU || seg == B_CRC);
  assign dout   = (seg == B_PDU || seg == B_CRC) ? wh_out : raw;

  ble_crc24     u_crc (.clk, .rst_n, .init(seeding), .en(crc_en), .din(raw), .crc(crc));
  ble_whitening u_wh  (.clk, .rst_n, .init(seeding), .channel(channel), .en(wh_en),
                       .din(raw), .dout(wh_out));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      seg <= B_IDLE; bcnt <= '0; len_q <= '0;
    end else if (seeding) begin
      seg <= B_PRE; bcnt <= '0; len_q <= pdu_len;
    end else if (bit_req && seg != B_IDLE) begin
      bcnt <= bcnt + 1'b1;
      case (seg)
        B_PRE: if (bcnt == 9'd7)  begin seg <= B_AA;  bcnt <= '0; end
        B_AA:  if (bcnt == 9'd31) begin seg <= B_PDU; bcnt <= '0; end
        B_PDU: if (bcnt == {len_q - 6'd1, 3'b111}) begin seg <= B_CRC; bcnt <= '0; end
        B_CRC: if (bcnt == 9'd23) begin seg <= B_IDLE; bcnt <= '0; end
        default: seg <= B_IDLE;
      endcase
    end

  a_len: assert property (@(posedge clk) disable iff (!rst_n)
    seeding |-> (pdu_len >= 6'd2 && pdu_len <= 6'(MAX_PDU)))
    else $error("ble_packet_generator: PDU length out of range");
endmodule

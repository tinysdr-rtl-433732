// tinysdr_pkg: types and constants shared by the baseband blocks.
//
// The I/Q radio exchanges 13-bit two's-complement I and Q samples at
// 4 MS/s. On the LVDS link each sample pair travels as one 32-bit word:
//   [31:30] I_SYNC = 2'b10, [29:17] I data, [16] I control,
//   [15:14] Q_SYNC = 2'b01, [13:1]  Q data, [0]  Q control,
// sent from bit 31 down to bit 0. The field order and the sync values are
// those of the radio's word format; the MSB-first bit order inside each
// data field is this design's assumption.
package tinysdr_pkg;

  localparam int unsigned IQ_W       = 13;  // bits per I or Q sample
  localparam int unsigned WORD_W     = 32;  // bits per LVDS word
  localparam logic [1:0]  I_SYNC     = 2'b10;
  localparam logic [1:0]  Q_SYNC     = 2'b01;

  typedef logic signed [IQ_W-1:0] iq_t;

  typedef struct packed {
    iq_t i;
    iq_t q;
  } iq_sample_t;  // 26 bits, the word stored in the sample buffer

  // LoRa spreading factors 6..12 fit in 4 bits
  typedef logic [3:0] sf_t;

  // Operating modes of the baseband, selected by the MCU
  typedef enum logic [1:0] {
    MODE_IDLE    = 2'd0,
    MODE_LORA_TX = 2'd1,
    MODE_LORA_RX = 2'd2,
    MODE_BLE_TX  = 2'd3
  } mode_t;

  function automatic logic [WORD_W-1:0] pack_word(iq_sample_t s, logic ctrl_i, logic ctrl_q);
    return {I_SYNC, s.i, ctrl_i, Q_SYNC, s.q, ctrl_q};
  endfunction

endpackage

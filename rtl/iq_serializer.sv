// iq_serializer: parallel I/Q samples to the radio's serial LVDS word stream.
//
// Every 16 clocks (64 MHz clock -> 4 Mwords/s) the serializer takes one
// sample, builds the 32-bit word {I_SYNC, I, ctrl, Q_SYNC, Q, ctrl} and
// shifts it out MSB first, two bits per clock: the first bit of each pair in
// the high half of the clock, the second in the low half (double data rate,
// 128 Mb/s). Two dual-edge flip-flops drive txd and the forwarded clock
// txclk, which is high in the first half of each period, so that the radio
// can sample txd on both of its edges.
// Interface: `load` pulses in the clock in which `sample` is taken; the
// producer must hold the next sample on `sample` by then. The word format,
// the 64 MHz DDR clock and the dual-edge flip-flops follow the paper; the
// control-bit values (inputs ctrl_i/ctrl_q) and the load handshake are this
// design's choice.
module iq_serializer
  import tinysdr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,       // when low the line carries all-zero bits
  input  iq_sample_t sample,
  input  logic       ctrl_i,
  input  logic       ctrl_q,
  output logic       load,     // sample consumed this clock
  output logic       txd,
  output logic       txclk
);
  logic [3:0]        pair_cnt;   // which bit pair of the word goes out next
  logic [WORD_W-1:0] shreg;
  logic              d_rise, d_fall;

  assign load = en && (pair_cnt == 4'd0);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      pair_cnt <= '0;
      shreg    <= '0;
      d_rise   <= 1'b0;
      d_fall   <= 1'b0;
    end else begin
      pair_cnt <= pair_cnt + 4'd1;
      if (load) begin
        {d_rise, d_fall} <= pack_word(sample, ctrl_i, ctrl_q)[WORD_W-1 -: 2];
        shreg <= {pack_word(sample, ctrl_i, ctrl_q)[WORD_W-3:0], 2'b00};
      end else begin
        {d_rise, d_fall} <= shreg[WORD_W-1 -: 2];
        shreg <= {shreg[WORD_W-3:0], 2'b00};
      end
    end

  dual_edge_ff u_data (.clk, .rst_n, .d_rise(d_rise), .d_fall(d_fall), .q(txd));
  dual_edge_ff u_clk  (.clk, .rst_n, .d_rise(1'b1),   .d_fall(1'b0),   .q(txclk));
endmodule

// iq_deserializer: the radio's serial LVDS word stream to parallel I/Q.
//
// rxd carries 32-bit words {I_SYNC, I[12:0], ctrl, Q_SYNC, Q[12:0], ctrl}
// at double data rate: one bit per clock edge of the 64 MHz clock. One
// flip-flop samples rxd on the rising edge and one on the falling edge; on
// every rising edge the two bits of the previous period enter a 33-bit
// history register, two at a time. The word phase is unknown at start-up,
// and it may start on either edge, so the block looks at the two 32-bit
// windows of the history that end on a rising or on a falling edge. When a
// window shows I_SYNC in its top two bits and Q_SYNC in bits 15:14 the block
// takes that bit phase and word boundary as a candidate; when the next
// word, 16 clocks later, shows the sync fields at the same place it locks,
// and from then on loads I and Q into 13-bit registers and pulses `valid`
// (every 16 clocks, 4 MS/s). While locked it
// checks the sync fields of every word and drops the lock on a mismatch.
// Timing: `valid` rises two clocks after the last bit of a word is on rxd.
// Sampling on both edges and the use of the sync fields follow the paper;
// the lock/unlock policy and the either-edge search are this design's.
module iq_deserializer
  import tinysdr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output iq_sample_t sample,
  output logic [1:0] ctrl,     // {I control, Q control} of the last word
  output logic       valid,
  output logic       locked
);
  logic       rise_q, fall_q;
  logic [32:0] hist;
  logic [3:0] pair_cnt;
  logic       cand;            // sync seen once, waiting for the next word
  logic       phase;           // 0: word starts on a rising edge, 1: falling
  logic [WORD_W-1:0] w0, w1, w;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rise_q <= 1'b0;
    else        rise_q <= rxd;

  always_ff @(negedge clk or negedge rst_n)
    if (!rst_n) fall_q <= 1'b0;
    else        fall_q <= rxd;

  // history of bits in arrival order, newest in bit 0
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) hist <= '0;
    else        hist <= {hist[30:0], rise_q, fall_q};

  function automatic logic sync_ok(logic [WORD_W-1:0] x);
    return (x[31:30] == I_SYNC) && (x[15:14] == Q_SYNC);
  endfunction

  assign w0 = hist[31:0];   // window ending on a falling-edge bit
  assign w1 = hist[32:1];   // window ending on a rising-edge bit
  assign w  = phase ? w1 : w0;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      locked   <= 1'b0;
      cand     <= 1'b0;
      phase    <= 1'b0;
      pair_cnt <= '0;
      valid    <= 1'b0;
      sample   <= '0;
      ctrl     <= '0;
    end else begin
      valid    <= 1'b0;
      pair_cnt <= pair_cnt + 4'd1;
      if (!locked && !cand) begin
        // a candidate word boundary: confirm it one word later
        if (sync_ok(w0) || sync_ok(w1)) begin
          cand     <= 1'b1;
          phase    <= !sync_ok(w0);
          pair_cnt <= 4'd1;
        end
      end else if (!locked) begin
        if (pair_cnt == 4'd0) begin
          cand <= 1'b0;
          if (sync_ok(w)) begin
            locked   <= 1'b1;
            valid    <= 1'b1;
            sample.i <= w[29:17];
            sample.q <= w[13:1];
            ctrl     <= {w[16], w[0]};
          end
        end
      end else if (pair_cnt == 4'd0) begin
        if (sync_ok(w)) begin
          valid    <= 1'b1;
          sample.i <= w[29:17];
          sample.q <= w[13:1];
          ctrl     <= {w[16], w[0]};
        end else begin
          locked   <= 1'b0;
        end
      end
    end
endmodule

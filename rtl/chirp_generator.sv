// chirp_generator: LoRa chirp I/Q samples from a squared phase accumulator.
//
// A chirp's instantaneous frequency rises linearly across the bandwidth BW
// and wraps from +BW/2 to -BW/2; symbol value s starts it s/2^SF of the way
// up (a cyclic shift). Two accumulators produce it: a frequency register
// that grows by a constant step every sample (and wraps by BW), and a phase
// register that integrates the frequency, so the phase grows with the
// square of time. Phase drives the cosine/sine tables that give I and Q.
// All quantities are fractions of the sample rate, in 2^32 units per cycle:
//   BW            = 2^32 / D                 (D = 2^os_log2 samples per chip)
//   start freq    = (s * 2^(32-SF) - 2^31) / D
//   step / sample = 2^(32 - SF - 2*os_log2)
// so every value is exact for power-of-two oversampling. The transmitter
// runs at 4 MS/s (os_log2 = log2(4 MHz / BW)); the demodulator's reference
// runs on decimated samples (os_log2 = 0). A downchirp is the same sweep
// with the frequency negated, i.e. the complex conjugate of the upchirp.
// Interface: `load` with `step` starts a new symbol (sym, down, sf, os_log2
// are taken then); `clr_phase` also zeroes the phase, otherwise the phase
// runs on continuously from the previous symbol. Every `step` produces one
// sample on i_o/q_o, valid one clock later (`valid`).
// The squared phase accumulator and two tables follow the paper; the number
// formats and the restriction to power-of-two BW ratios are this design's.
module chirp_generator
  import tinysdr_pkg::*;
#(
  parameter int unsigned PHASE_W  = 32,
  parameter int unsigned LUT_BITS = 10,
  parameter int          AMP      = 4095
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        step,
  input  logic        load,
  input  logic        clr_phase,
  input  logic [11:0] sym,
  input  logic        down,
  input  sf_t         sf,
  input  logic [3:0]  os_log2,   // 0..9: BW = sample rate / 2^os_log2
  output logic        valid,
  output iq_t         i_o,
  output iq_t         q_o
);
  localparam int unsigned FW = PHASE_W + 2;   // signed frequency width
  typedef logic signed [FW-1:0] freq_t;

  freq_t              freq, f_cur, f_nxt, step_f, hb;
  logic [PHASE_W-1:0] phase, ph_cur;
  logic               down_q, dn;
  sf_t                sf_q, sf_c;
  logic [3:0]         os_q, os_c;

  always_comb begin
    // configuration of the symbol being generated: the new one on a load
    dn     = load ? down    : down_q;
    sf_c   = load ? sf      : sf_q;
    os_c   = load ? os_log2 : os_q;
    step_f = freq_t'(1) <<< (PHASE_W - 32'(sf_c) - 2 * 32'(os_c));
    hb     = (freq_t'(1) <<< (PHASE_W - 1)) >>> os_c;          // BW/2
    // start frequency (s / 2^SF - 1/2) * BW, negated for a downchirp
    f_cur  = ((freq_t'(sym) <<< (PHASE_W - 32'(sf_c))) - (freq_t'(1) <<< (PHASE_W - 1))) >>> os_c;
    if (load && down) f_cur = -f_cur;
    if (!load)        f_cur = freq;
    ph_cur = (load && clr_phase) ? '0 : phase;
    f_nxt  = dn ? f_cur - step_f : f_cur + step_f;
    if (!dn && f_nxt >= hb)      f_nxt = f_nxt - (hb <<< 1);
    else if (dn && f_nxt <= -hb) f_nxt = f_nxt + (hb <<< 1);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      freq <= '0; phase <= '0; down_q <= 1'b0; sf_q <= 4'd7; os_q <= '0; valid <= 1'b0;
    end else begin
      valid <= step;
      if (step) begin
        freq  <= f_nxt;
        phase <= ph_cur + f_cur[PHASE_W-1:0];
        if (load) begin
          down_q <= down; sf_q <= sf; os_q <= os_log2;
        end
      end
    end

  sincos_lut #(.PHASE_W(PHASE_W), .LUT_BITS(LUT_BITS), .AMP(AMP)) u_lut (
    .clk, .en(step), .phase(ph_cur), .cos_o(i_o), .sin_o(q_o));

  // spreading factor and bandwidth ratio the number formats can represent
  a_cfg: assert property (@(posedge clk) disable iff (!rst_n)
    (step && load) |-> (sf >= 4'd6 && sf <= 4'd12 && (32'(sf) + 2 * 32'(os_log2)) <= PHASE_W))
    else $error("chirp_generator: unsupported SF/bandwidth");
endmodule

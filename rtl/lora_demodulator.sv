// lora_demodulator: symbol-by-symbol LoRa demodulation from the sample buffer.
//
// The received, filtered and decimated samples (one per chip, 2^SF per
// symbol) wait in the sample buffer. Once a whole symbol is buffered the
// controller reads it twice. In the first pass each sample is multiplied by
// a downchirp from the chirp generator; in the second, by an upchirp. Each
// product stream (2^SF values, one per clock, `fft_last` on the final one)
// goes to the FFT core, which is outside this block. The FFT results come
// back on fft_out_* and the symbol detector turns the two spectra into a
// symbol value and a chirp type. The symbol is then dropped from the buffer
// and the next one is processed. `n_symbols` symbols are demodulated after
// `start`; `busy` stays high until the last result is out.
// Timing: per symbol, 2 * 2^SF + 4 clocks of reads, then the FFT latency;
// at 64 MHz this is far shorter than the symbol's air time, so the
// demodulator keeps up in real time.
// Dechirping with generated reference chirps, the FFT, the peak search and
// the up/down comparison follow the paper. Reading the buffered symbol
// twice, symbol alignment given by the start of the buffer (the paper does
// not describe preamble synchronisation), and a streaming FFT that takes one
// sample per clock are this design's choices.
module lora_demodulator
  import tinysdr_pkg::*;
#(
  parameter int unsigned DEPTH   = 39699,
  parameter int unsigned FFT_IN_W  = 16,
  parameter int unsigned FFT_OUT_W = 32,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(DEPTH+1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  sf_t                         sf,
  input  logic [15:0]                 n_symbols,
  output logic                        busy,
  // sample buffer read side
  output logic                        rd_req,
  output logic [AW-1:0]               rd_offset,
  input  iq_sample_t                  rd_data,
  output logic                        adv,
  output logic [CW-1:0]               adv_count,
  input  logic [CW-1:0]               count,
  // to the FFT core
  output logic                        fft_in_valid,
  output logic signed [FFT_IN_W-1:0]  fft_in_re,
  output logic signed [FFT_IN_W-1:0]  fft_in_im,
  output logic                        fft_in_last,
  output sf_t                         fft_log2_size,
  // from the FFT core
  input  logic                        fft_out_valid,
  input  logic signed [FFT_OUT_W-1:0] fft_out_re,
  input  logic signed [FFT_OUT_W-1:0] fft_out_im,
  // results
  output logic                        sym_valid,
  output logic [11:0]                 sym,
  output logic                        sym_is_down
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_READ, S_DROP} state_t;
  state_t       state;
  sf_t          sf_q;
  logic [12:0]  n;          // sample index within the pass
  logic         pass;       // 0: downchirp reference, 1: upchirp reference
  logic [15:0]  to_read, to_detect;
  logic [12:0]  nsym;       // 2^SF
  logic         step, load, last_q, last_qq;
  iq_sample_t   ref_s;
  logic         ref_valid;
  logic         mult_valid;
  logic [IQ_W-1:0] ref_i, ref_q;

  assign nsym          = 13'(13'd1 << sf_q);
  assign fft_log2_size = sf_q;
  assign step          = (state == S_READ);
  assign load          = step && (n == '0);
  assign rd_req        = step;
  assign rd_offset     = AW'(n);
  assign adv           = (state == S_DROP);
  assign adv_count     = CW'(nsym);
  assign busy          = (state != S_IDLE) || (to_detect != '0);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE; sf_q <= 4'd7; n <= '0; pass <= 1'b0; to_read <= '0; to_detect <= '0;
      last_q <= 1'b0; last_qq <= 1'b0;
    end else begin
      last_q  <= step && (n == nsym - 1'b1);
      last_qq <= last_q;
      if (sym_valid && to_detect != '0) to_detect <= to_detect - 1'b1;
      case (state)
        S_IDLE: if (start) begin
          sf_q <= sf; to_read <= n_symbols; to_detect <= n_symbols;
          state <= (n_symbols == '0) ? S_IDLE : S_WAIT;
        end
        S_WAIT: if (count >= CW'(nsym)) begin
          state <= S_READ; n <= '0; pass <= 1'b0;
        end
        S_READ: begin
          if (n == nsym - 1'b1) begin
            n <= '0;
            if (pass) state <= S_DROP;
            pass <= !pass;
          end else n <= n + 1'b1;
        end
        S_DROP: begin
          to_read <= to_read - 1'b1;
          state   <= (to_read == 16'd1) ? S_IDLE : S_WAIT;
        end
        default: state <= S_IDLE;
      endcase
    end

  chirp_generator u_ref (
    .clk, .rst_n, .step(step), .load(load), .clr_phase(1'b1), .sym(12'd0),
    .down(!pass), .sf(sf_q), .os_log2(4'd0), .valid(ref_valid), .i_o(ref_i), .q_o(ref_q));

  assign ref_s = '{i: ref_i, q: ref_q};

  complex_multiplier #(.OUT_W(FFT_IN_W)) u_mult (
    .clk, .rst_n, .in_valid(ref_valid), .a(rd_data), .b(ref_s),
    .out_valid(mult_valid), .out_re(fft_in_re), .out_im(fft_in_im));

  assign fft_in_valid = mult_valid;
  assign fft_in_last  = last_qq;

  symbol_detector #(.IN_W(FFT_OUT_W)) u_det (
    .clk, .rst_n, .start(start && state == S_IDLE), .sf(sf),
    .fft_valid(fft_out_valid), .fft_re(fft_out_re), .fft_im(fft_out_im),
    .sym_valid(sym_valid), .sym(sym), .is_down(sym_is_down), .peak_mag());

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    rd_req |-> (CW'(rd_offset) < count))
    else $error("lora_demodulator: read past buffered samples");
endmodule

// sincos_lut: cosine and sine lookup tables, phase in, I/Q out.
//
// Two ROMs of 2^LUT_BITS entries each hold AMP * cos(2 pi k / 2^LUT_BITS)
// and AMP * sin(2 pi k / 2^LUT_BITS), rounded to 13-bit two's complement.
// The tables are computed at elaboration from the formula, so no data file
// is needed. The top LUT_BITS bits of the phase address both tables; the
// outputs are registered, one clock after `en`.
// The paper's chirp generator uses one table for Sin and one for Cos; table
// size and amplitude are this design's choice.
module sincos_lut
  import tinysdr_pkg::*;
#(
  parameter int unsigned PHASE_W  = 32,
  parameter int unsigned LUT_BITS = 10,
  parameter int          AMP      = 4095
) (
  input  logic               clk,
  input  logic               en,
  input  logic [PHASE_W-1:0] phase,   // 2^PHASE_W = one full turn
  output iq_t                cos_o,
  output iq_t                sin_o
);
  localparam int unsigned N = 1 << LUT_BITS;
  typedef iq_t table_t [N];

  function automatic table_t make_table(bit is_sin);
    table_t t;
    real a;
    for (int k = 0; k < N; k++) begin
      a = 2.0 * 3.14159265358979323846 * real'(k) / real'(N);
      t[k] = iq_t'($rtoi(real'(AMP) * (is_sin ? $sin(a) : $cos(a)) + ((is_sin ? $sin(a) : $cos(a)) >= 0.0 ? 0.5 : -0.5)));
    end
    return t;
  endfunction

  localparam table_t COS_TAB = make_table(1'b0);
  localparam table_t SIN_TAB = make_table(1'b1);

  always_ff @(posedge clk)
    if (en) begin
      cos_o <= COS_TAB[phase[PHASE_W-1 -: LUT_BITS]];
      sin_o <= SIN_TAB[phase[PHASE_W-1 -: LUT_BITS]];
    end
endmodule

// complex_multiplier: dechirps received samples with a reference chirp.
//
// Computes (a_i + j a_q) * (b_i + j b_q) with four 13x13 multipliers, one
// subtraction and one addition, registered once (one clock latency, one
// product per clock). The 27-bit result is rounded and shifted right by
// SHIFT to OUT_W bits, the input width assumed for the FFT core; with
// 13-bit full-scale inputs the product needs 26 bits, so the default
// SHIFT = 11 keeps the top 16 bits of a full-scale product.
// The operation is the paper's; widths and scaling are this design's.
module complex_multiplier
  import tinysdr_pkg::*;
#(
  parameter int unsigned OUT_W = 16,
  parameter int unsigned SHIFT = 11
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  iq_sample_t              a,
  input  iq_sample_t              b,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_re,
  output logic signed [OUT_W-1:0] out_im
);
  localparam int unsigned PW = 2 * IQ_W + 1;
  logic signed [PW-1:0] re, im;

  assign re = PW'(a.i * b.i) - PW'(a.q * b.q);
  assign im = PW'(a.i * b.q) + PW'(a.q * b.i);

  function automatic logic signed [OUT_W-1:0] scale(logic signed [PW-1:0] x);
    logic signed [PW:0] r;
    r = ((PW+1)'(x) + ((PW+1)'(1) <<< (SHIFT - 1))) >>> SHIFT;
    if (r > (PW+1)'((1 << (OUT_W - 1)) - 1))  return {1'b0, {(OUT_W-1){1'b1}}};
    if (r < -(PW+1)'(1 << (OUT_W - 1)))       return {1'b1, {(OUT_W-1){1'b0}}};
    return r[OUT_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0; out_re <= '0; out_im <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_re <= scale(re);
        out_im <= scale(im);
      end
    end
endmodule

// tb_complex_multiplier: random and corner-case operands against
// (a_i b_i - a_q b_q, a_i b_q + a_q b_i) rounded and shifted by 11, with a
// one-clock latency.
module automatic tb_complex_multiplier;
  import tinysdr_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  iq_sample_t a, b;
  logic signed [15:0] out_re, out_im;
  int checks = 0, failures = 0;
  complex_multiplier dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .out_re, .out_im);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic int sc(longint x);
    longint r = (x + 1024) >>> 11;
    if (r > 32767) r = 32767; if (r < -32768) r = -32768;
    return int'(r);
  endfunction
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      int ai, aq, bi, bq;
      ai = (k < 4) ? -4096 : int'($signed($urandom % 8192)) - 4096;
      aq = (k < 2) ? -4096 : int'($signed($urandom % 8192)) - 4096;
      bi = (k < 4) ? -4096 : int'($signed($urandom % 8192)) - 4096;
      bq = (k < 1) ?  4095 : int'($signed($urandom % 8192)) - 4096;
      @(posedge clk); in_valid <= 1; a <= '{i: iq_t'(ai), q: iq_t'(aq)}; b <= '{i: iq_t'(bi), q: iq_t'(bq)};
      @(posedge clk); in_valid <= 0; #1;
      checks++;
      if (!out_valid || int'(out_re) != sc(longint'(ai) * bi - longint'(aq) * bq) ||
          int'(out_im) != sc(longint'(ai) * bq + longint'(aq) * bi)) begin
        failures++; $display("%0d %0d %0d %0d -> %0d %0d", ai, aq, bi, bq, out_re, out_im);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_gfsk_modulator: sends runs of ones, runs of zeros and random bits.
// Checks that a new bit is requested every 4 samples, that the envelope
// stays at full scale (|I + jQ| within 2% of 4095), that during a long run
// of ones (zeros) the phase advances by +1/16 (-1/16) of a turn per sample
// (modulation index 0.5 at 1 Mb/s, 4 MS/s), and that the sign of the phase
// change summed over each bit recovers the random bits.
module automatic tb_gfsk_modulator;
  import tinysdr_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, din = 0, tick, bit_req, valid;
  iq_t i_o, q_o;
  function automatic real fabs(real x); return x < 0.0 ? -x : x; endfunction
  int checks = 0, failures = 0, nt = 0, last_req = -1;
  real prev_ph = 0, dph;
  bit bits [$];
  real sums [$];
  real acc = 0; int acc_n = 0;
  clock_divider #(.DIV(4)) div (.clk, .rst_n, .tick);
  gfsk_modulator dut (.clk, .rst_n, .en, .tick, .din, .bit_req, .valid, .i_o, .q_o);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int mode = 0;   // 0: ones, 1: zeros, 2: random
  int nbits = 0;
  always @(posedge clk) if (en && tick) begin
    nt++;
    if (bit_req) begin
      if (last_req >= 0) begin checks++; if (nt - last_req != 4) failures++; end
      last_req = nt;
      nbits++;
    end
  end
  // bit source: changes din right after each request
  always @(posedge clk) if (bit_req) begin
    bit b;
    b = (mode == 0) ? 1 : (mode == 1) ? 0 : 1'($urandom);
    if (mode == 2) bits.push_back(b);
    din <= b;
  end

  always @(posedge clk) if (valid) begin
    real mag, ph;
    #1;
    mag = $sqrt(real'(i_o) * real'(i_o) + real'(q_o) * real'(q_o));
    if (nt > 2) checks++; if (nt > 2 && (mag < 4010.0 || mag > 4180.0)) begin failures++; $display("magnitude %f", mag); end
    ph = $atan2(real'(q_o), real'(i_o)) / 6.283185307179586;
    dph = ph - prev_ph; dph -= $floor(dph + 0.5);
    prev_ph = ph;
    if (mode < 2 && nbits > 6) begin
      checks++;
      if (fabs(dph - (mode == 0 ? 0.0625 : -0.0625)) > 0.004) begin failures++; $display("mode %0d dphase %f", mode, dph); end
    end
    if (mode == 2) begin acc += dph; acc_n++; if (acc_n == 4) begin sums.push_back(acc); acc = 0; acc_n = 0; end end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    @(posedge clk); en <= 1;
    while (nbits < 20) @(posedge clk);
    mode = 1; nbits = 0;
    while (nbits < 20) @(posedge clk);
    mode = 2; nbits = 0;
    while (nbits < 200) @(posedge clk);
    en <= 0;
    // the bit-to-pulse delay is fixed; accept the best of four alignments
    checks++;
    begin
      int best = 1000;
      for (int off = 0; off < 4; off++) begin
        int errs = 0;
        for (int k = 2; k < 180; k++) if ((sums[k + off] > 0) != bits[k]) errs++;
        if (errs < best) best = errs;
      end
      if (best != 0) begin failures++; $display("%0d bit errors", best); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

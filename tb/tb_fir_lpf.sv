// tb_fir_lpf: feeds an impulse, a DC step and random samples through the
// filter and compares every output with a direct-form convolution worked
// out here, h[n] from the windowed-sinc design (taps summing to 2^15),
// rounded and saturated the same way. Also checks the latency: the result is out 16 clocks after
// the sample (TAPS + 2), in time for the next 4 MS/s sample.
module automatic tb_fir_lpf;
  import tinysdr_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  iq_sample_t in, out;
  int checks = 0, failures = 0;
  int h [14] = '{12, 158, 662, 1729, 3255, 4797, 5771, 5771, 4797, 3255, 1729, 662, 158, 12};
  int xi [$], xq [$];
  int t_in;

  fir_lpf dut (.clk, .rst_n, .in_valid, .in, .out_valid, .out);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int ref_out(int x [$]);
    longint acc = 0; longint r;
    for (int k = 0; k < 14; k++) if (x.size() > k) acc += longint'(x[x.size()-1-k]) * h[k];
    r = (acc + 16384) >>> 15;
    if (r > 4095) r = 4095; if (r < -4096) r = -4096;
    return int'(r);
  endfunction

  task automatic push(int vi, int vq);
    int ei, eq, lat;
    @(posedge clk);
    in_valid <= 1; in <= '{i: iq_t'(vi), q: iq_t'(vq)};
    xi.push_back(vi); xq.push_back(vq);
    @(posedge clk); in_valid <= 0; t_in = $time;
    lat = 0;
    while (!out_valid) begin @(posedge clk); lat++; end
    ei = ref_out(xi); eq = ref_out(xq);
    checks++;
    if (int'(out.i) != ei || int'(out.q) != eq) begin
      failures++; $display("out %0d %0d expected %0d %0d", out.i, out.q, ei, eq);
    end
    checks++; if (lat != 16) begin failures++; $display("latency %0d", lat); end
    repeat (2) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    push(4000, -4000);
    for (int k = 0; k < 14; k++) push(0, 0);
    for (int k = 0; k < 20; k++) push(4095, -4096);   // DC: saturating gain of 1
    for (int k = 0; k < 200; k++) push($signed($urandom % 8192) - 4096, $signed($urandom % 8192) - 4096);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

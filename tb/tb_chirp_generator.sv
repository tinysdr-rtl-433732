// tb_chirp_generator: compares generated chirps with the ideal chirp
// exp(j 2 pi phi[n]), phi[n] = sum over m < n of f[m], where
// f[m] = (((s * D + m) mod (N * D)) / (N * D) - 1/2) / D is the frequency of an
// upchirp of symbol s (cycles per sample, D = 2^os samples per chip,
// downchirp: -f). I and Q must be within 1% of full scale of 4095*cos and
// 4095*sin (the table has 1024 phase steps). Covers several SF, os and
// symbol values, up and down, and checks one output per step.
module automatic tb_chirp_generator;
  import tinysdr_pkg::*;
  logic clk = 0, rst_n = 0, step = 0, load = 0, down = 0, valid;
  logic [11:0] sym; sf_t sf; logic [3:0] os; iq_t i_o, q_o;
  function automatic real fabs(real x); return x < 0.0 ? -x : x; endfunction
  int checks = 0, failures = 0, worst = 0;
  chirp_generator dut (.clk, .rst_n, .step, .load, .clr_phase(1'b1), .sym, .down, .sf, .os_log2(os),
    .valid, .i_o, .q_o);
  always #5 clk = ~clk;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(int s, int f, int o, bit dn);
    int N = 1 << f, D = 1 << o, L = N * D;
    real phi = 0.0, fr, ei, eq;
    for (int m = 0; m < L; m++) begin
      @(posedge clk);
      step <= 1; load <= (m == 0); sym <= 12'(s); sf <= sf_t'(f); os <= 4'(o); down <= dn;
      @(posedge clk); step <= 0; load <= 0; #1;
      ei = 4095.0 * $cos(2.0 * 3.141592653589793 * phi);
      eq = 4095.0 * $sin(2.0 * 3.141592653589793 * phi);
      checks++;
      if (!valid || fabs(real'(i_o) - ei) > 41.0 || fabs(real'(q_o) - eq) > 41.0) begin
        failures++;
        if (failures < 10) $display("s=%0d sf=%0d os=%0d dn=%0d m=%0d: %0d %0d vs %f %f", s, f, o, dn, m, i_o, q_o, ei, eq);
      end
      fr = (real'((s * D + m) % L) / real'(L) - 0.5) / real'(D);
      if (dn) fr = -fr;
      phi = phi + fr;
      phi = phi - $floor(phi);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    run(0, 7, 0, 0);
    run(37, 7, 0, 0);
    run(100, 7, 2, 0);
    run(0, 7, 1, 1);
    run(5, 6, 3, 0);
    run(1000, 12, 0, 0);
    run(200, 8, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

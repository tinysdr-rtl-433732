// tb_clock_divider: checks that the sample strobe comes once every DIV
// clocks, DIV = 16 (64 MHz to 4 MS/s).
module automatic tb_clock_divider;
  logic clk = 0, rst_n = 0, tick;
  int checks = 0, failures = 0, last = -1, n = 0, cyc = 0;
  clock_divider #(.DIV(16)) dut (.clk, .rst_n, .tick);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (tick) begin
      if (last >= 0) begin checks++; if (cyc - last != 16) begin failures++; $display("tick spacing %0d", cyc - last); end end
      last = cyc; n++;
    end
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (16 * 20) @(posedge clk);
    checks++; if (n < 19 || n > 21) begin failures++; $display("ticks %0d", n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_spi_slave: an SPI mode-0 master model (sclk = clk / 16) writes
// random bytes to random addresses, in single and burst frames, and reads
// back from a register file model; checks every write strobe and every
// byte read on miso.
module automatic tb_spi_slave;
  logic clk = 0, rst_n = 0, sclk = 0, cs_n = 1, mosi = 0, miso, wr_en, rd_en;
  logic [6:0] addr; logic [7:0] wr_data, rd_data;
  logic [7:0] regs [128];
  int checks = 0, failures = 0, writes = 0;
  spi_slave dut (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .wr_en, .rd_en, .addr, .wr_data, .rd_data);
  always #5 clk = ~clk;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) begin
    if (wr_en) begin regs[addr] <= wr_data; writes++; end
    if (rd_en) rd_data <= regs[addr];
  end
  task automatic xfer(input logic [7:0] tx, output logic [7:0] rx);
    for (int b = 7; b >= 0; b--) begin
      mosi = tx[b]; #80; sclk = 1; rx[b] = miso; #80; sclk = 0;
    end
  endtask
  initial begin
    logic [7:0] model [128];
    logic [7:0] rx;
    for (int k = 0; k < 128; k++) begin regs[k] = 0; model[k] = 0; end
    #30 rst_n = 1; #100;
    for (int t = 0; t < 60; t++) begin
      int a = $urandom % 120, n = 1 + (t % 4);
      cs_n = 0; #80;
      xfer({1'b1, 7'(a)}, rx);
      for (int k = 0; k < n; k++) begin logic [7:0] d = 8'($urandom); xfer(d, rx); model[a + k] = d; end
      #80 cs_n = 1; #300;
      a = $urandom % 120; n = 1 + (t % 3);
      cs_n = 0; #80;
      xfer({1'b0, 7'(a)}, rx);
      for (int k = 0; k < n; k++) begin
        xfer(8'h00, rx);
        checks++; if (rx != model[a + k]) begin failures++; $display("read %0d: %h expected %h", a + k, rx, model[a + k]); end
      end
      #80 cs_n = 1; #300;
    end
    for (int k = 0; k < 128; k++) begin checks++; if (regs[k] != model[k]) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

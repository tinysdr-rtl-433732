// tb_sample_sram: writes random words to random addresses and reads them
// back one clock later, against a reference array (reduced depth).
module automatic tb_sample_sram;
  localparam int DEPTH = 1000;
  logic clk = 0, we = 0, re = 0;
  logic [9:0] waddr, raddr;
  logic [25:0] wdata, rdata;
  logic [25:0] ref_m [DEPTH];
  bit written [DEPTH];
  int checks = 0, failures = 0;
  sample_sram #(.DEPTH(DEPTH), .WIDTH(26)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int k = 0; k < 3000; k++) begin
      @(posedge clk);
      we <= 1; waddr <= 10'($urandom % DEPTH); wdata <= 26'($urandom);
      @(negedge clk); ref_m[waddr] = wdata; written[waddr] = 1;
    end
    @(posedge clk); we <= 0;
    for (int k = 0; k < DEPTH; k++) if (written[k]) begin
      @(posedge clk); re <= 1; raddr <= 10'(k);
      @(posedge clk); re <= 0; #1;
      checks++; if (rdata != ref_m[k]) begin failures++; $display("addr %0d %h != %h", k, rdata, ref_m[k]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_ble_crc24: compares the CRC of random PDUs with a reference computed
// in the bit-reversed (right-shifting) form of the same LFSR: register
// seeded with bit-reverse(0x555555), polynomial bit-reverse(0x65B) << ...
// (0xDA6000), shifted right; its bit-reverse must equal the DUT's CRC.
module automatic tb_ble_crc24;
  logic clk = 0, rst_n = 0, init = 0, en = 0, din = 0;
  logic [23:0] crc;
  int checks = 0, failures = 0;
  ble_crc24 dut (.clk, .rst_n, .init, .en, .din, .crc);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic logic [23:0] rev24(logic [23:0] x);
    for (int k = 0; k < 24; k++) rev24[k] = x[23-k];
  endfunction
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      int n = 2 + $urandom % 38;
      logic [23:0] r = rev24(24'h555555);
      @(posedge clk); init <= 1; @(posedge clk); init <= 0;
      for (int k = 0; k < n; k++) begin
        logic [7:0] byt = 8'($urandom);
        for (int b = 0; b < 8; b++) begin
          @(posedge clk); en <= 1; din <= byt[b];
          if (r[0] ^ byt[b]) r = (r >> 1) ^ 24'hDA6000; else r = r >> 1;
        end
      end
      @(posedge clk); en <= 0; #1;
      checks++; if (crc != rev24(r)) begin failures++; $display("crc %h expected %h", crc, rev24(r)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

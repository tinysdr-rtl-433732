// tb_ble_packet_generator: loads a 20-byte advertising PDU, sends it on
// channel 37 and collects the bit stream. Checks the preamble 0xAA and
// access address 0x8E89BED6 (LSB first), then de-whitens the rest with a
// model of the x^7 + x^4 + 1 sequence and checks the PDU bits and the CRC,
// which is recomputed here in the bit-reversed LFSR form.
module automatic tb_ble_packet_generator;
  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, bit_req = 0, dout, busy;
  logic [5:0] wr_addr;
  logic [7:0] wr_data;
  int checks = 0, failures = 0;
  bit got [$];
  ble_packet_generator dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .channel(6'd37), .pdu_len(6'd20),
    .start, .bit_req, .dout, .busy);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic logic [23:0] rev24(logic [23:0] x);
    for (int k = 0; k < 24; k++) rev24[k] = x[23-k];
  endfunction
  initial begin
    logic [7:0] pdu [20];
    bit expect_b [$];
    int p;
    logic [23:0] r;
    repeat (3) @(posedge clk); rst_n = 1;
    pdu[0] = 8'h42; pdu[1] = 8'd18;
    for (int k = 2; k < 20; k++) pdu[k] = 8'($urandom);
    for (int k = 0; k < 20; k++) begin @(posedge clk); wr_en <= 1; wr_addr <= 6'(k); wr_data <= pdu[k]; end
    @(posedge clk); wr_en <= 0;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0; #1;
    while (busy) begin
      repeat (3) @(posedge clk);
      #1 got.push_back(dout);
      @(posedge clk); bit_req <= 1; @(posedge clk); bit_req <= 0; #1;
    end
    // expected, before whitening
    for (int b = 0; b < 8; b++) expect_b.push_back(8'hAA >> b & 1);
    for (int b = 0; b < 32; b++) expect_b.push_back(32'h8E89BED6 >> b & 1);
    r = rev24(24'h555555);
    for (int k = 0; k < 20; k++) for (int b = 0; b < 8; b++) begin
      bit x = pdu[k][b];
      expect_b.push_back(x);
      if (r[0] ^ x) r = (r >> 1) ^ 24'hDA6000; else r = r >> 1;
    end
    for (int b = 23; b >= 0; b--) expect_b.push_back(rev24(r)[b]);
    checks++;
    if (got.size() != expect_b.size()) begin failures++; $display("%0d bits, expected %0d", got.size(), expect_b.size()); end
    else begin
      p = 1 | (1 << 1) | (1 << 4) | (1 << 6);   // channel 37 = 100101b into positions 1..6
      for (int k = 0; k < got.size(); k++) begin
        bit g = got[k];
        if (k >= 40) begin
          bit o = (p >> 6) & 1;
          g ^= o;
          p = ((p << 1) & 8'h7F) | o; if (o) p ^= 8'h10;
        end
        checks++; if (g != expect_b[k]) begin failures++; if (failures < 5) $display("bit %0d", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

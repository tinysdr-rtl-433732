// tb_ble_whitening: for each of the advertising channels 37, 38, 39 and a
// few data channels, checks the whitening sequence against a model kept as
// an integer with one bit per register position, that the sequence repeats
// after exactly 127 bits (x^7 + x^4 + 1 is primitive) and not before, and
// that whitening twice restores the data.
module automatic tb_ble_whitening;
  logic clk = 0, rst_n = 0, init = 0, en = 0, din = 0, dout;
  logic [5:0] channel;
  int checks = 0, failures = 0;
  ble_whitening dut (.clk, .rst_n, .init, .channel, .en, .din, .dout);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int chans [6] = '{37, 38, 39, 0, 12, 36};
    repeat (3) @(posedge clk); rst_n = 1;
    foreach (chans[c]) begin
      int p = 1;       // bit k = position k; position 0 = 1
      bit seq [254];
      for (int k = 0; k < 6; k++) if (chans[c] & (1 << (5 - k))) p |= 1 << (k + 1);
      @(posedge clk); init <= 1; channel <= 6'(chans[c]); @(posedge clk); init <= 0;
      for (int k = 0; k < 254; k++) begin
        bit o, d;
        o = (p >> 6) & 1; d = 1'($urandom);
        din <= d; en <= 1; #1;
        checks++; if (dout != (d ^ o)) failures++;
        seq[k] = o;
        @(posedge clk); #1;
        p = ((p << 1) & 8'h7F) | o;
        if (o) p ^= 8'h10;
      end
      en <= 0;
      checks++;
      for (int k = 0; k < 127; k++) if (seq[k] != seq[k + 127]) begin failures++; break; end
      begin
        bit same = 1;
        for (int k = 0; k < 63; k++) if (seq[k] != seq[k + 63]) same = 0;
        checks++; if (same) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

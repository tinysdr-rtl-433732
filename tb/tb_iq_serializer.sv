// tb_iq_serializer: samples txd on both edges of txclk the way the radio
// would, rebuilds the 32-bit words and checks sync fields, I and Q against
// the samples offered, and that one word goes out every 16 clocks.
module automatic tb_iq_serializer;
  import tinysdr_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, load, txd, txclk;
  iq_sample_t sample;
  int checks = 0, failures = 0;
  iq_sample_t sent [$];
  logic [63:0] bits;
  int nbits = 0, words = 0, last_load = -1, cyc = 0;
  logic locked = 0;

  iq_serializer dut (.clk, .rst_n, .en, .sample, .ctrl_i(1'b0), .ctrl_q(1'b1), .load, .txd, .txclk);
  always #5 clk = ~clk;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // producer: offer a new random sample after each load
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (load) begin
      sent.push_back(sample);
      if (last_load >= 0) begin checks++; if (cyc - last_load != 16) failures++; end
      last_load = cyc;
      sample <= '{i: iq_t'($urandom), q: iq_t'($urandom)};
    end
  end

  // radio model: sample txd in the middle of each half period of txclk
  always @(txclk) begin
    #2;
    bits = {bits[62:0], txd};
    nbits++;
    if (!locked && nbits >= 32 && bits[31:30] == I_SYNC && bits[15:14] == Q_SYNC && bits[16] == 1'b0 && bits[0] == 1'b1)
      begin locked = 1; nbits = 0; check_word(bits[31:0]); end
    else if (locked && nbits == 32) begin nbits = 0; check_word(bits[31:0]); end
  end

  task automatic check_word(logic [31:0] w);
    iq_sample_t exp_s;
    words++;
    if (sent.size() == 0) begin failures++; return; end
    exp_s = sent.pop_front();
    checks++;
    if (w != {I_SYNC, exp_s.i, 1'b0, Q_SYNC, exp_s.q, 1'b1}) begin
      failures++; $display("word %h expected I=%h Q=%h", w, exp_s.i, exp_s.q);
    end
  endtask

  initial begin
    sample = '{i: 13'h0AAA, q: 13'h1555};
    repeat (3) @(posedge clk); rst_n = 1; en = 1;
    repeat (16 * 40) @(posedge clk);
    checks++; if (words < 35) begin failures++; $display("only %0d words", words); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_iq_deserializer: drives the radio's DDR word stream (one bit per clock
// edge, starting at an arbitrary bit offset) and checks lock, the I/Q and
// control values of every word and the 4 MS/s output rate. A corrupted
// sync field must drop the lock, which must then be regained. Random data
// can imitate the sync fields, so words output by a false lock before the
// real one is found are ignored.
module automatic tb_iq_deserializer;
  import tinysdr_pkg::*;
  logic clk = 0, rst_n = 0, rxd = 0, valid, locked;
  logic [1:0] ctrl;
  iq_sample_t sample;
  int checks = 0, failures = 0, lost = 0, cyc = 0, last_v = -1;
  iq_sample_t q [$];
  logic [1:0] cq [$];
  logic corrupt = 0;
  bit genuine = 0;
  int matched = 0;

  iq_deserializer dut (.clk, .rst_n, .rxd, .sample, .ctrl, .valid, .locked);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // transmitter: one bit per half period, changes 1 time unit after each edge
  task automatic send_bit(logic b); @(clk); #1 rxd = b; endtask
  initial begin : tx
    logic [31:0] w;
    iq_sample_t s;
    logic ci, cq_b;
    repeat (3) send_bit(1'b1);         // odd offset: words start on a falling edge
    for (int k = 0; k < 310; k++) begin
      s = '{i: iq_t'($urandom), q: iq_t'($urandom)}; ci = 1'($urandom); cq_b = 1'($urandom);
      w = {I_SYNC, s.i, ci, Q_SYNC, s.q, cq_b};
      if (k == 150) begin w[31:30] = 2'b11; corrupt = 1; end
      else begin q.push_back(s); cq.push_back({ci, cq_b}); end
      for (int b = 31; b >= 0; b--) send_bit(w[b]);
    end
  end

  logic was_locked = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (was_locked && !locked && genuine) begin lost++; genuine = 0; end
    was_locked = locked;
    if (valid) begin
      if (last_v >= 0 && !corrupt) begin checks++; if (cyc - last_v != 16) begin failures++; $display("spacing %0d", cyc - last_v); end end
      last_v = cyc;
      begin
        int idx = -1;
        foreach (q[j]) if (idx < 0 && q[j] == sample) idx = j;
        if (idx < 0 && !genuine) begin
          // output of a false lock before the stream was found
        end else begin
          checks++;
          if (idx < 0) begin failures++; $display("unexpected sample %h", sample); end
          else begin
            if (genuine && idx != 0) begin failures++; $display("%0d samples skipped", idx); end
            genuine = 1; matched++;
            repeat (idx) begin void'(q.pop_front()); void'(cq.pop_front()); end
            if (cq[0] != ctrl) begin failures++; $display("ctrl %b expected %b", ctrl, cq[0]); end
            void'(q.pop_front()); void'(cq.pop_front());
          end
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (16 * 302) @(posedge clk);
    checks++; if (lost < 1 || matched < 250) begin failures++; $display("lock lost %0d times, %0d matched", lost, matched); end
    checks++; if (!locked) begin failures++; $display("not locked at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

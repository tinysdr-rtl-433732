// tb_lora_packet_generator: transmits a 9-byte payload "123456789" and
// records every symbol the generator loads into the chirp generator with
// its length in samples. Checks: preamble of PREAMBLE zero upchirps, two
// sync upchirps, 2 full and one quarter downchirp, then the data symbols
// of {len, payload, crc} cut into SF-bit pieces LSB first, where the CRC
// must be 0x31C3, the published check value of CRC-16/XMODEM for this
// string. Also checks the total number of samples.
module automatic tb_lora_packet_generator;
  import tinysdr_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, tick, busy, step, load, down;
  logic [7:0] wr_addr, wr_data;
  logic [11:0] sym; sf_t sf_o; logic [3:0] os_o;
  int checks = 0, failures = 0;
  int got_sym [$], got_len [$]; bit got_dn [$];
  int cur_len = 0, total = 0;
  localparam int SF = 7, OS = 2, PRE = 10;

  clock_divider #(.DIV(4)) div (.clk, .rst_n, .tick);
  lora_packet_generator dut (.clk, .rst_n, .sf(sf_t'(SF)), .os_log2(4'(OS)), .preamble_len(8'(PRE)),
    .sync_sym0(12'd24), .sync_sym1(12'd32), .payload_len(8'd9), .wr_en, .wr_addr, .wr_data,
    .start, .tick, .busy, .step, .load, .sym, .down, .sf_o, .os_o);
  always #5 clk = ~clk;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (step) begin
    total++;
    if (load) begin
      if (got_sym.size() > 0) got_len.push_back(cur_len);
      got_sym.push_back(int'(sym)); got_dn.push_back(down); cur_len = 0;
    end
    cur_len++;
  end

  initial begin
    string msg = "123456789";
    logic [7:0] frame [$];
    int nbits, exp_syms [$], N = 1 << SF, L = N << OS;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 9; k++) begin
      @(posedge clk); wr_en <= 1; wr_addr <= 8'(k); wr_data <= msg[k];
    end
    @(posedge clk); wr_en <= 0;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    @(posedge clk); while (busy) @(posedge clk);
    got_len.push_back(cur_len);
    frame.push_back(8'd9);
    for (int k = 0; k < 9; k++) frame.push_back(msg[k]);
    frame.push_back(8'hC3); frame.push_back(8'h31);
    nbits = frame.size() * 8;
    for (int b = 0; b < nbits; b += SF) begin
      int v = 0;
      for (int j = 0; j < SF; j++) if (b + j < nbits) v |= int'(frame[(b + j) / 8][(b + j) % 8]) << j;
      exp_syms.push_back(v);
    end
    checks++;
    if (got_sym.size() != PRE + 2 + 3 + exp_syms.size()) begin
      failures++; $display("%0d symbols, expected %0d", got_sym.size(), PRE + 5 + exp_syms.size());
    end else begin
      for (int k = 0; k < got_sym.size(); k++) begin
        int es, el; bit ed;
        el = L; ed = 0;
        if (k < PRE) es = 0;
        else if (k == PRE) es = 24;
        else if (k == PRE + 1) es = 32;
        else if (k < PRE + 5) begin es = 0; ed = 1; if (k == PRE + 4) el = L / 4; end
        else es = exp_syms[k - PRE - 5];
        checks++;
        if (got_sym[k] != es || got_dn[k] != ed || got_len[k] != el) begin
          failures++; $display("symbol %0d: %0d/%0d/%0d expected %0d/%0d/%0d", k, got_sym[k], got_dn[k], got_len[k], es, ed, el);
        end
      end
    end
    checks++; if (total != (PRE + 4 + exp_syms.size()) * L + L / 4) begin failures++; $display("samples %0d", total); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

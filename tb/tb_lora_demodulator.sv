// tb_lora_demodulator: the demodulator with its sample buffer and a
// behavioural FFT. The testbench writes ideal chirps (computed here with
// real arithmetic, one sample per chip, random symbol values, some of them
// downchirps) into the buffer, runs the demodulator and checks every
// symbol value and chirp type, and that each symbol takes 2 * 2^SF reads.
module automatic tb_lora_demodulator;
  import tinysdr_pkg::*;
  localparam int DEPTH = 2048;
  localparam int AW = $clog2(DEPTH), CW = $clog2(DEPTH+1);
  logic clk = 0, rst_n = 0, start = 0, busy;
  sf_t sf;
  logic [15:0] n_symbols;
  logic rd_req, adv, full, wr_valid = 0;
  logic [AW-1:0] rd_offset, ram_waddr, ram_raddr;
  logic [CW-1:0] adv_count, count;
  iq_sample_t rd_data, wr_data;
  logic ram_we, ram_re;
  logic [25:0] ram_wdata, ram_rdata;
  logic [15:0] overflows;
  logic fin_v, fin_last, fout_v, sym_valid, sym_is_down;
  logic signed [15:0] fin_re, fin_im;
  logic signed [31:0] fout_re, fout_im;
  sf_t fft_log2;
  logic [11:0] sym;
  int checks = 0, failures = 0, reads = 0;
  int exp_s [$]; bit exp_d [$];

  memory_controller #(.DEPTH(DEPTH), .WIDTH(26)) mc (.clk, .rst_n, .clear(1'b0), .wr_valid, .wr_data,
    .rd_req, .rd_offset, .rd_data, .adv, .adv_count, .count, .full, .overflows,
    .ram_we, .ram_waddr, .ram_wdata, .ram_re, .ram_raddr, .ram_rdata);
  sample_sram #(.DEPTH(DEPTH), .WIDTH(26)) ram (.clk, .we(ram_we), .waddr(ram_waddr), .wdata(ram_wdata),
    .re(ram_re), .raddr(ram_raddr), .rdata(ram_rdata));
  lora_demodulator #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .start, .sf, .n_symbols, .busy,
    .rd_req, .rd_offset, .rd_data, .adv, .adv_count, .count,
    .fft_in_valid(fin_v), .fft_in_re(fin_re), .fft_in_im(fin_im), .fft_in_last(fin_last), .fft_log2_size(fft_log2),
    .fft_out_valid(fout_v), .fft_out_re(fout_re), .fft_out_im(fout_im),
    .sym_valid, .sym, .sym_is_down);
  fft_model fft (.clk, .in_valid(fin_v && rst_n), .in_re(fin_re), .in_im(fin_im), .in_last(fin_last), .log2_size(fft_log2),
    .out_valid(fout_v), .out_re(fout_re), .out_im(fout_im));
  always #5 clk = ~clk;
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rd_req) reads++;

  always @(posedge clk) if (sym_valid) begin
    checks++;
    if (exp_s.size() == 0) failures++;
    else begin
      if (sym != 12'(exp_s[0]) || sym_is_down != exp_d[0]) begin
        failures++; $display("got %0d/%0d expected %0d/%0d", sym, sym_is_down, exp_s[0], exp_d[0]);
      end
      void'(exp_s.pop_front()); void'(exp_d.pop_front());
    end
  end

  task automatic write_chirp(int s, int f, bit dn);
    int N = 1 << f; real phi = 0, fr;
    for (int m = 0; m < N; m++) begin
      @(posedge clk); wr_valid <= 1;
      wr_data <= '{i: iq_t'($rtoi(3000.0 * $cos(6.283185307179586 * phi))),
                   q: iq_t'($rtoi(3000.0 * $sin(6.283185307179586 * phi)))};
      fr = real'((s + m) % N) / real'(N) - 0.5;
      if (dn) fr = -fr;
      phi += fr; phi -= $floor(phi);
    end
    @(posedge clk); wr_valid <= 0;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 7; f <= 8; f++) begin
      int ns = 6;
      reads = 0;
      @(posedge clk); start <= 1; sf <= sf_t'(f); n_symbols <= 16'(ns); @(posedge clk); start <= 0;
      for (int k = 0; k < ns; k++) begin
        int s = (k == 0) ? 0 : int'($urandom % (1 << f));
        bit dn = (k == 3);
        exp_s.push_back(dn ? 0 : s); exp_d.push_back(dn);
        write_chirp(dn ? 0 : s, f, dn);
      end
      while (busy) @(posedge clk);
      repeat (20) @(posedge clk);
      checks++; if (exp_s.size() != 0) begin failures++; $display("%0d symbols missing", exp_s.size()); end
      checks++; if (reads != ns * 2 * (1 << f)) begin failures++; $display("reads %0d", reads); end
      exp_s.delete(); exp_d.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

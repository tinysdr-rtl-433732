// tb_memory_controller: the FIFO controller with its SRAM at a small,
// non-power-of-two depth. Writes a counting sequence, reads samples at
// offsets from the head, advances in blocks across the wrap point, fills
// the buffer to check `full` and overflow counting, and compares all data
// with a queue model.
module automatic tb_memory_controller;
  localparam int DEPTH = 100;
  localparam int AW = $clog2(DEPTH), CW = $clog2(DEPTH+1);
  logic clk = 0, rst_n = 0, clear = 0, wr_valid = 0, rd_req = 0, adv = 0, full;
  logic [25:0] wr_data, rd_data, ram_wdata, ram_rdata;
  logic [AW-1:0] rd_offset, ram_waddr, ram_raddr;
  logic [CW-1:0] adv_count, count;
  logic [15:0] overflows;
  logic ram_we, ram_re;
  int checks = 0, failures = 0;
  logic [25:0] model [$];
  int next = 0;

  memory_controller #(.DEPTH(DEPTH), .WIDTH(26)) dut (.clk, .rst_n, .clear, .wr_valid, .wr_data,
    .rd_req, .rd_offset, .rd_data, .adv, .adv_count, .count, .full, .overflows,
    .ram_we, .ram_waddr, .ram_wdata, .ram_re, .ram_raddr, .ram_rdata);
  sample_sram #(.DEPTH(DEPTH), .WIDTH(26)) ram (.clk, .we(ram_we), .waddr(ram_waddr), .wdata(ram_wdata),
    .re(ram_re), .raddr(ram_raddr), .rdata(ram_rdata));
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic write_n(int n);
    for (int k = 0; k < n; k++) begin
      @(posedge clk); wr_valid <= 1; wr_data <= 26'(next * 7 + 3);
      if (model.size() < DEPTH) model.push_back(26'(next * 7 + 3));
      next++;
    end
    @(posedge clk); wr_valid <= 0;
  endtask
  task automatic read_at(int off);
    @(posedge clk); rd_req <= 1; rd_offset <= AW'(off);
    @(posedge clk); rd_req <= 0; #1;
    checks++; if (rd_data != model[off]) begin failures++; $display("off %0d: %h != %h", off, rd_data, model[off]); end
  endtask
  task automatic advance(int n);
    @(posedge clk); adv <= 1; adv_count <= CW'(n);
    @(posedge clk); adv <= 0;
    repeat (n) void'(model.pop_front());
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      write_n(40);
      @(posedge clk); #1 checks++; if (count != CW'(model.size())) begin failures++; $display("count %0d vs %0d", count, model.size()); end
      for (int k = 0; k < 10; k++) read_at($urandom % model.size());
      advance(35);
    end
    write_n(DEPTH);                 // overfill
    @(posedge clk); #1;
    checks++; if (!full) failures++;
    checks++; if (overflows == 0) failures++;
    checks++; if (count != CW'(DEPTH)) failures++;
    for (int k = 0; k < 20; k++) read_at($urandom % DEPTH);
    @(posedge clk); clear <= 1; @(posedge clk); clear <= 0; #1;
    checks++; if (count != 0 || full) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

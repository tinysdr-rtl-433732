// memory_controller: FIFO control for the sample buffer SRAM.
//
// Writes one full sample word into the SRAM in every clock that
// `wr_valid` is high, at a write pointer that wraps at DEPTH (a depth that
// need not be a power of two). The reader sees a FIFO whose head is the
// oldest unread sample: it may read any sample `rd_offset` places after the
// head without removing it (rd_req, data on rd_data one clock later), and
// it removes `adv_count` samples at once with `adv`. The demodulator uses
// this to read one chirp symbol twice, decimated, and then drop it.
// `count` is the number of buffered samples. A write into a full buffer is
// dropped and counted in `overflows`. A read beyond `count` is the caller's
// error and is flagged by an assertion.
// The paper says the controller writes a full word every cycle into a FIFO
// in embedded SRAM; the offset read, bulk advance and overflow policy are
// this design's.
module memory_controller #(
  parameter int unsigned DEPTH = 39699,
  parameter int unsigned WIDTH = 26,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH+1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  // write side
  input  logic             wr_valid,
  input  logic [WIDTH-1:0] wr_data,
  // read side
  input  logic             rd_req,
  input  logic [AW-1:0]    rd_offset,
  output logic [WIDTH-1:0] rd_data,
  input  logic             adv,
  input  logic [CW-1:0]    adv_count,
  output logic [CW-1:0]    count,
  output logic             full,
  output logic [15:0]      overflows,
  // SRAM port
  output logic             ram_we,
  output logic [AW-1:0]    ram_waddr,
  output logic [WIDTH-1:0] ram_wdata,
  output logic             ram_re,
  output logic [AW-1:0]    ram_raddr,
  input  logic [WIDTH-1:0] ram_rdata
);
  logic [AW-1:0] wptr, rptr;
  logic          do_wr;
  logic [AW:0]   raddr_sum, rptr_sum;

  function automatic logic [AW-1:0] wrap(logic [AW:0] a);
    return (a >= (AW+1)'(DEPTH)) ? AW'(a - (AW+1)'(DEPTH)) : a[AW-1:0];
  endfunction

  assign full      = (count == CW'(DEPTH));
  assign do_wr     = wr_valid && !full;
  assign ram_we    = do_wr;
  assign ram_waddr = wptr;
  assign ram_wdata = wr_data;
  assign raddr_sum = {1'b0, rptr} + {1'b0, rd_offset};
  assign ram_re    = rd_req;
  assign ram_raddr = wrap(raddr_sum);
  assign rd_data   = ram_rdata;
  assign rptr_sum  = {1'b0, rptr} + (AW+1)'(adv_count);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0; overflows <= '0;
    end else if (clear) begin
      wptr <= '0; rptr <= '0; count <= '0; overflows <= '0;
    end else begin
      if (do_wr) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (wr_valid && full) overflows <= overflows + 1'b1;
      if (adv) rptr <= wrap(rptr_sum);
      count <= count + CW'(do_wr) - (adv ? adv_count : '0);
    end

  // the reader may only touch samples that are in the buffer
  a_read_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    rd_req |-> (CW'(rd_offset) < count))
    else $error("memory_controller: read beyond buffered samples");
  a_adv_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    adv |-> (adv_count <= count))
    else $error("memory_controller: advance beyond buffered samples");
endmodule

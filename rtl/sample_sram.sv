// sample_sram: the FPGA block RAM that buffers received I/Q samples.
//
// A simple dual-port RAM: one synchronous write port and one synchronous
// read port (data appears the clock after the address). Each word is one
// 26-bit I/Q sample. The default depth fills the 126 kB of embedded memory
// the paper gives for the buffer: 126 * 1024 * 8 / 26 = 39699 words. It is
// written as an array so that synthesis maps it onto block RAM; its size is
// the paper's, the port arrangement is this design's.
module sample_sram #(
  parameter int unsigned DEPTH = 39699,
  parameter int unsigned WIDTH = 26,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule

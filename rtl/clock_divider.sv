// clock_divider: sample-rate strobe from the 64 MHz baseband clock.
//
// A modulo-DIV counter that pulses `tick` for one clock every DIV clocks.
// With the default DIV = 16 it marks the 4 MS/s sample instants of the
// 64 MHz clock. The transmit chain advances on these strobes instead of
// running on a separate divided clock, so the whole baseband stays in one
// clock domain (a choice of this design; the paper only names a clock
// divider between the PLL and the packet generator).
module clock_divider #(
  parameter int unsigned DIV = 16
) (
  input  logic clk,
  input  logic rst_n,
  output logic tick
);
  logic [$clog2(DIV)-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else begin
      tick <= (cnt == '0);
      cnt  <= (cnt == DIV-1) ? '0 : cnt + 1'b1;
    end
endmodule

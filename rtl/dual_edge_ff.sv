// dual_edge_ff: a pseudo dual-edge flip-flop for double-data-rate output.
//
// Two ordinary flip-flops, one on each clock edge, whose outputs are
// XOR-ed. The rising-edge flop stores d_rise ^ qn, the falling-edge flop
// stores the (rising-edge registered) d_fall ^ qp, so q = qp ^ qn shows
// d_rise for the high half of the clock period and d_fall for the low half.
// No clock signal reaches a data path, so the output does not glitch on the
// clock. Timing: d_rise and d_fall are sampled at one rising edge and appear
// on q in the following high and low half-periods respectively.
// The structure follows the published pseudo dual-edge flip-flop; the
// rising-edge retiming of d_fall is this design's choice.
module dual_edge_ff (
  input  logic clk,
  input  logic rst_n,
  input  logic d_rise,
  input  logic d_fall,
  output logic q
);
  logic qp, qn, fall_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      qp     <= 1'b0;
      fall_q <= 1'b0;
    end else begin
      qp     <= d_rise ^ qn;
      fall_q <= d_fall;
    end

  always_ff @(negedge clk or negedge rst_n)
    if (!rst_n) qn <= 1'b0;
    else        qn <= fall_q ^ qp;

  assign q = qp ^ qn;
endmodule

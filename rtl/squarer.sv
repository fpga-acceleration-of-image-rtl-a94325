// ^2: squares a signed value in one clock, as the FPGA's DSP block does.
//
// sq = a * a, registered: the result appears one clock after a, one result
// per clock. The one-clock latency is the source's; writing it as a plain
// registered multiply instead of a vendor DSP core is this design's choice.
module squarer #(
  parameter int unsigned IN_W = 16
) (
  input  logic                   clk,
  input  logic signed [IN_W-1:0] a,
  output logic [2*IN_W-1:0]      sq
);
  logic signed [2*IN_W-1:0] prod;

  assign prod = a * a;
  always_ff @(posedge clk) sq <= $unsigned(prod);
endmodule

// SUM: adds one value from each of the N parallel channels.
//
// The terms are signed; they are sign-extended to OUT_W and added, and the
// sum is registered, so it appears one clock after the terms. OUT_W defaults
// to IN_W + clog2(N), which cannot overflow. The single register stage is
// this design's choice.
module adder_tree #(
  parameter int unsigned N     = 8,
  parameter int unsigned IN_W  = 32,
  parameter int unsigned OUT_W = IN_W + $clog2(N)
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  in_vec [N],
  output logic signed [OUT_W-1:0] sum
);
  logic signed [OUT_W-1:0] acc;

  always_comb begin
    acc = '0;
    for (int i = 0; i < N; i++) acc += OUT_W'(in_vec[i]);
  end

  always_ff @(posedge clk) sum <= acc;
endmodule

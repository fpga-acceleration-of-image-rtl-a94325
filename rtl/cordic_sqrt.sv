// Square root with a 16-clock latency, standing in for the vendor CORDIC core.
//
// root = floor(sqrt(radicand)) for an unsigned IN_W-bit radicand. The
// digit-by-digit method settles one root bit per pipeline stage: the remainder
// takes the next two radicand bits and the trial value (root<<2)|1 is
// subtracted when it fits. IN_W/2 stages, one register each, so for the default
// 32-bit radicand the result follows the input by 16 clocks, the latency the
// source gives for its CORDIC square root; a new radicand may enter every clock.
// The method is this design's choice.
module cordic_sqrt #(
  parameter int unsigned IN_W = 32,
  localparam int unsigned RW  = IN_W / 2,
  localparam int unsigned LAT = RW
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [IN_W-1:0] radicand,
  output logic            out_valid,
  output logic [RW-1:0]   root
);
  typedef struct packed {
    logic            v;
    logic [IN_W-1:0] x;     // radicand bits still to be consumed, MSB first
    logic [RW+1:0]   rem;
    logic [RW-1:0]   q;
  } stage_t;

  stage_t st [LAT+1];

  assign st[0] = '{v: in_valid, x: radicand, rem: '0, q: '0};

  for (genvar i = 0; i < LAT; i++) begin : g_stage
    logic [RW+3:0] rem_sh, trial;
    stage_t        nxt;
    always_comb begin
      rem_sh = {st[i].rem, st[i].x[IN_W-1 -: 2]};
      trial  = (RW+4)'({st[i].q, 2'b01});
      nxt    = st[i];
      nxt.x  = st[i].x << 2;
      if (rem_sh >= trial) begin
        nxt.rem = (RW+2)'(rem_sh - trial);
        nxt.q   = {st[i].q[RW-2:0], 1'b1};
      end else begin
        nxt.rem = (RW+2)'(rem_sh);
        nxt.q   = {st[i].q[RW-2:0], 1'b0};
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) st[i+1] <= '0;
      else        st[i+1] <= nxt;
    end
  end

  assign out_valid = st[LAT].v;
  assign root      = st[LAT].q;
endmodule

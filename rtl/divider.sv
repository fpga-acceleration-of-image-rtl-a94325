// Divider with a 20-clock latency, standing in for the vendor divider core.
//
// quot = floor(num / den) by restoring division, one quotient bit per
// pipeline stage from the most significant down: a stage subtracts den << j
// from the remainder when it fits and sets bit j. Q_W stages, one register
// each, so the quotient follows the operands by Q_W clocks (20 by default, the
// source's divider latency) and a new division may start every clock.
// Quotients of Q_W bits or more saturate to all ones; den = 0 gives 0. The
// method, the saturation and the zero rule are this design's choices.
module divider #(
  parameter int unsigned NUM_W = 74,
  parameter int unsigned DEN_W = 48,
  parameter int unsigned Q_W   = 20,
  localparam int unsigned W    = ((NUM_W > DEN_W + Q_W) ? NUM_W : DEN_W + Q_W) + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic             out_valid,
  output logic [Q_W-1:0]   quot
);
  typedef struct packed {
    logic             v;
    logic             sat;    // quotient does not fit Q_W bits
    logic             zero;   // division by zero
    logic [W-1:0]     rem;
    logic [DEN_W-1:0] den;
    logic [Q_W-1:0]   q;
  } stage_t;

  stage_t st [Q_W+1];

  always_comb begin
    st[0].v    = in_valid;
    st[0].zero = (den == '0);
    st[0].sat  = (W'(num) >= (W'(den) << Q_W)) && (den != '0);
    st[0].rem  = W'(num);
    st[0].den  = den;
    st[0].q    = '0;
  end

  for (genvar i = 0; i < Q_W; i++) begin : g_stage
    localparam int unsigned J = Q_W - 1 - i;   // quotient bit settled here
    stage_t       nxt;
    logic [W-1:0] sub;
    always_comb begin
      sub = W'(st[i].den) << J;
      nxt = st[i];
      if (st[i].rem >= sub) begin
        nxt.rem  = st[i].rem - sub;
        nxt.q[J] = 1'b1;
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) st[i+1] <= '0;
      else        st[i+1] <= nxt;
    end
  end

  assign out_valid = st[Q_W].v;
  assign quot = st[Q_W].zero ? '0 : st[Q_W].sat ? '1 : st[Q_W].q;
endmodule

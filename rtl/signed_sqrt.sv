// sign(x)*sqrt(|x|) module of the DMAS datapath.
//
// As in the source, the sign is taken from the top bit of the signed sample,
// the absolute value goes through a square root and the sign is put back.
// Samples are two's complement here, so the absolute value is a negation of
// negative samples (the source's "change the sign bit" would hold for
// sign-magnitude numbers). |x| is shifted left by 2*FRAC before the root so
// that y carries FRAC fraction bits: y = sign(x) * floor(sqrt(|x| * 2^(2*FRAC))).
// mag = |x| * 2^(2*FRAC), i.e. y^2 without the rounding, is brought out
// aligned with y for the DMAS correction term.
//
// Timing: one clock for the absolute value, IN_W/2 + FRAC clocks for the root
// (16 for the defaults, the source's CORDIC latency): latency 17, one result
// per clock.
module signed_sqrt #(
  parameter int unsigned IN_W = 16,
  parameter int unsigned FRAC = 8,
  localparam int unsigned RAD_W = 2 * (IN_W / 2 + FRAC),
  localparam int unsigned ROOT_W = RAD_W / 2,
  localparam int unsigned LAT    = ROOT_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x,
  output logic                    out_valid,
  output logic signed [IN_W+1:0]  y,
  output logic [RAD_W-1:0]        mag
);
  logic             v_q, sign_q;
  logic [IN_W-1:0]  abs_q;            // |x|, up to 2^(IN_W-1), fits unsigned
  logic [RAD_W-1:0] rad;
  logic [ROOT_W-1:0] root;
  logic             root_v;
  logic [LAT-1:0]   sign_d;
  logic [RAD_W-1:0] mag_d [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q    <= 1'b0;
      sign_q <= 1'b0;
      abs_q  <= '0;
    end else begin
      v_q    <= in_valid;
      sign_q <= x[IN_W-1];
      abs_q  <= x[IN_W-1] ? IN_W'(-x) : IN_W'(x);
    end
  end

  assign rad = RAD_W'(abs_q) << (2 * FRAC);

  cordic_sqrt #(.IN_W(RAD_W)) u_root (
    .clk, .rst_n, .in_valid(v_q), .radicand(rad), .out_valid(root_v), .root(root)
  );

  // sign and magnitude wait for the root
  always_ff @(posedge clk) begin
    sign_d   <= {sign_d[LAT-2:0], sign_q};
    mag_d[0] <= rad;
    for (int i = 1; i < LAT; i++) mag_d[i] <= mag_d[i-1];
  end

  assign out_valid = root_v;
  assign y   = sign_d[LAT-1] ? -(IN_W+2)'(root) : (IN_W+2)'(root);
  assign mag = mag_d[LAT-1];
endmodule

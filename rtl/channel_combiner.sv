// Channel combiner: merges the eight channel values of one pixel.
//
// For each pixel of an imaging cycle it forms two partial sums over the
// parallel channels, chosen by the algorithm:
//   DAS     A = sum s                        B = 0
//   DAS-CF  A = sum s                        B = sum s^2        (DSP squares)
//   DMAS    A = sum sign(s)*sqrt|s|          B = sum |s|*2^16   (sqrt modules)
// These are the SUM, ^2 and sign(x)*sqrt(|x|) blocks that sit between the DAS
// modules and the final operations in the source's three architectures. The
// DMAS term B stands for the sum of the squared signed roots, which equals
// sum |s| (in the roots' fixed point, 2^16 per unit). The final squaring,
// division and subtraction act on sums over all channels and are done later.
//
// Timing: every mode has the same latency, 18 clocks (absolute value 1, root
// 16, SUM 1); the DAS and DAS-CF terms are delayed to match, so pixels leave
// in the order they came, one per clock. Sharing one datapath between the
// modes and the fixed latency are this design's choices. With eight lanes the
// B sum needs 36 bits; b is ACC_B_W wide to match the accumulator, so its top
// bits stay zero.
module channel_combiner
  import pat_pkg::*;
#(
  parameter int unsigned LANES = 8,
  parameter int unsigned NPIX  = 65536,
  localparam int unsigned PIX_W = $clog2(NPIX),
  localparam int unsigned LAT   = COMB_LAT
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  mode_e                      mode,
  input  logic                       in_valid,
  input  logic [PIX_W-1:0]           in_pix,
  input  logic signed [SAMPLE_W-1:0] lanes [LANES],
  output logic                       out_valid,
  output logic [PIX_W-1:0]           out_pix,
  output logic signed [ACC_A_W-1:0]  a,
  output logic [ACC_B_W-1:0]         b
);
  localparam int unsigned DA = LAT - 1;   // clocks before the SUM stage
  localparam int unsigned AT_W = ROOT_W;          // A term width (signed)
  localparam int unsigned BT_W = TERM_B_W + 1;    // B term width (signed, >= 0)
  localparam int unsigned AS_W = AT_W + $clog2(LANES);
  localparam int unsigned BS_W = BT_W + $clog2(LANES);

  logic signed [AT_W-1:0] a_term [LANES];
  logic signed [BT_W-1:0] b_term [LANES];
  logic signed [AS_W-1:0] a_sum;
  logic signed [BS_W-1:0] b_sum;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [ROOT_W-1:0]   root;
    logic [TERM_B_W-1:0]        mag;
    logic [TERM_B_W-1:0]        sq;
    logic                       unused_v;
    logic signed [SAMPLE_W-1:0] s_d  [DA];
    logic [TERM_B_W-1:0]        sq_d [DA-1];

    signed_sqrt #(.IN_W(SAMPLE_W), .FRAC(ROOT_FRAC)) u_ssqrt (
      .clk, .rst_n, .in_valid(in_valid), .x(lanes[l]),
      .out_valid(unused_v), .y(root), .mag(mag)
    );

    squarer #(.IN_W(SAMPLE_W)) u_sq (.clk, .a(lanes[l]), .sq(sq));

    always_ff @(posedge clk) begin
      s_d[0]  <= lanes[l];
      sq_d[0] <= sq;
      for (int i = 1; i < DA; i++)   s_d[i]  <= s_d[i-1];
      for (int i = 1; i < DA-1; i++) sq_d[i] <= sq_d[i-1];
    end

    always_comb begin
      unique case (mode)
        MODE_DAS_CF: begin
          a_term[l] = AT_W'(s_d[DA-1]);
          b_term[l] = $signed(BT_W'(sq_d[DA-2]));
        end
        MODE_DMAS: begin
          a_term[l] = root;
          b_term[l] = $signed(BT_W'(mag));
        end
        default: begin
          a_term[l] = AT_W'(s_d[DA-1]);
          b_term[l] = '0;
        end
      endcase
    end
  end

  adder_tree #(.N(LANES), .IN_W(AT_W), .OUT_W(AS_W)) u_sum_a (.clk, .in_vec(a_term), .sum(a_sum));
  adder_tree #(.N(LANES), .IN_W(BT_W), .OUT_W(BS_W)) u_sum_b (.clk, .in_vec(b_term), .sum(b_sum));

  // valid and pixel index travel with the data
  logic [LAT-1:0]   v_d;
  logic [PIX_W-1:0] pix_d [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d <= '0;
      for (int i = 0; i < LAT; i++) pix_d[i] <= '0;
    end else begin
      v_d      <= {v_d[LAT-2:0], in_valid};
      pix_d[0] <= in_pix;
      for (int i = 1; i < LAT; i++) pix_d[i] <= pix_d[i-1];
    end
  end

  assign out_valid = v_d[LAT-1];
  assign out_pix   = pix_d[LAT-1];
  assign a         = ACC_A_W'(a_sum);
  assign b         = ACC_B_W'($unsigned(b_sum));
endmodule

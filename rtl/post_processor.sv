// Final per-pixel operations on the sums over all channels.
//
//   DAS     out = A
//   DAS-CF  out = A^2 / B                (DSP square, then the divider)
//   DMAS    out = (A^2 - B) / 2          (DSP square, subtraction, shift right)
// A^2 - B with A = sum sign(s)sqrt|s| and B = sum |s| is twice the sum of the
// pairwise products, so the DMAS result is the sum over channel pairs i<j of
// sign(s_i)sqrt|s_i| * sign(s_j)sqrt|s_j|, in units of 2^-16. The DAS-CF
// quotient has CF_FRAC fraction bits. These are the operations drawn after the
// sums in the source's DAS-CF and DMAS architectures; as drawn there, the
// DAS-CF result is the coherence ratio itself, not multiplied by the DAS value.
//
// Timing: 22 clocks for every mode (square 1, divider 20, output register 1),
// one pixel per clock; DAS and DMAS results are delayed to match the divider.
// `mode` must be held for the whole frame.
module post_processor
  import pat_pkg::*;
#(
  parameter int unsigned NPIX = 65536,
  localparam int unsigned PIX_W = $clog2(NPIX),
  localparam int unsigned NUM_W = 2 * ACC_A_W + CF_FRAC
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  mode_e                     mode,
  input  logic                      in_valid,
  input  logic [PIX_W-1:0]          in_pix,
  input  logic signed [ACC_A_W-1:0] a,
  input  logic [ACC_B_W-1:0]        b,
  output logic                      out_valid,
  output logic [PIX_W-1:0]          out_pix,
  output logic signed [OUT_W-1:0]   out_data
);
  localparam int unsigned D = DIV_Q_W;   // clocks spent in the divider

  logic [2*ACC_A_W-1:0]     a_sq;
  logic                     v1;
  logic [PIX_W-1:0]         pix1;
  logic signed [ACC_A_W-1:0] a1;
  logic [ACC_B_W-1:0]       b1;
  logic signed [OUT_W-1:0]  dmas1;
  logic [DIV_Q_W-1:0]       quot;
  logic                     quot_v;

  squarer #(.IN_W(ACC_A_W)) u_sq (.clk, .a(a), .sq(a_sq));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; pix1 <= '0; a1 <= '0; b1 <= '0;
    end else begin
      v1 <= in_valid; pix1 <= in_pix; a1 <= a; b1 <= b;
    end
  end

  assign dmas1 = (signed'(OUT_W'(a_sq)) - signed'(OUT_W'(b1))) >>> 1;

  divider #(.NUM_W(NUM_W), .DEN_W(ACC_B_W), .Q_W(DIV_Q_W)) u_div (
    .clk, .rst_n, .in_valid(v1), .num(NUM_W'(a_sq) << CF_FRAC), .den(b1),
    .out_valid(quot_v), .quot(quot)
  );

  // DAS and DMAS results, pixel index and valid wait for the divider
  logic signed [OUT_W-1:0] das_d  [D];
  logic signed [OUT_W-1:0] dmas_d [D];
  logic [PIX_W-1:0]        pix_d  [D];
  logic [D-1:0]            v_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d <= '0;
      for (int i = 0; i < D; i++) begin
        das_d[i] <= '0; dmas_d[i] <= '0; pix_d[i] <= '0;
      end
    end else begin
      v_d       <= {v_d[D-2:0], v1};
      das_d[0]  <= OUT_W'(a1);
      dmas_d[0] <= dmas1;
      pix_d[0]  <= pix1;
      for (int i = 1; i < D; i++) begin
        das_d[i] <= das_d[i-1]; dmas_d[i] <= dmas_d[i-1]; pix_d[i] <= pix_d[i-1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pix <= '0; out_data <= '0;
    end else begin
      out_valid <= v_d[D-1];
      out_pix   <= pix_d[D-1];
      unique case (mode)
        MODE_DAS_CF: out_data <= OUT_W'(quot);
        MODE_DMAS:   out_data <= dmas_d[D-1];
        default:     out_data <= das_d[D-1];
      endcase
    end
  end

  a_divider_aligned: assert property (@(posedge clk) disable iff (!rst_n) quot_v == v_d[D-1])
    else $error("divider result out of step with the pixel stream");
endmodule

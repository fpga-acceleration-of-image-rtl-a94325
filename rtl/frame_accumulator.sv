// Frame accumulator: sums the partial results of all imaging cycles.
//
// With eight parallel channels, an array of N channels is processed in N/8
// imaging cycles. The per-cycle partial sums A and B of every pixel are added
// into two frame buffers by read-modify-write, one pixel per clock. On the
// first imaging cycle (`first`) the buffers are not read, which clears the
// previous frame; on the last (`last`) the totals are passed on to the final
// operations instead of being stored. Keeping the sums over all channels is
// this design's reading of the source, which says a frame takes N/8 imaging
// cycles but not how their results are joined.
//
// Timing: out_* follow in_* by two clocks (buffer read, add and register).
// Each pixel may appear once per imaging cycle; the controller keeps far more
// than two clocks between two visits of the same pixel.
module frame_accumulator #(
  parameter int unsigned NPIX = 65536,
  parameter int unsigned A_W  = 32,
  parameter int unsigned B_W  = 48,
  localparam int unsigned PIX_W = $clog2(NPIX)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [PIX_W-1:0]      in_pix,
  input  logic signed [A_W-1:0] in_a,
  input  logic [B_W-1:0]        in_b,
  input  logic                  first,
  input  logic                  last,
  output logic                  out_valid,
  output logic [PIX_W-1:0]      out_pix,
  output logic signed [A_W-1:0] out_a,
  output logic [B_W-1:0]        out_b
);
  logic signed [A_W-1:0] buf_a [NPIX];
  logic [B_W-1:0]        buf_b [NPIX];

  logic                  v_q, first_q, last_q;
  logic [PIX_W-1:0]      pix_q;
  logic signed [A_W-1:0] a_q, rd_a, sum_a;
  logic [B_W-1:0]        b_q, rd_b, sum_b;
  logic                  wr;

  // stage 1: read the buffers, hold the incoming partials
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; first_q <= 1'b0; last_q <= 1'b0;
      pix_q <= '0; a_q <= '0; b_q <= '0;
    end else begin
      v_q <= in_valid; first_q <= first; last_q <= last;
      pix_q <= in_pix; a_q <= in_a; b_q <= in_b;
    end
  end

  // stage 2: add and either store or pass on
  assign sum_a = (first_q ? A_W'(0) : rd_a) + a_q;
  assign sum_b = (first_q ? B_W'(0) : rd_b) + b_q;
  assign wr    = v_q && !last_q;

  always_ff @(posedge clk) begin
    rd_a <= buf_a[in_pix];
    if (wr) buf_a[pix_q] <= sum_a;
  end
  always_ff @(posedge clk) begin
    rd_b <= buf_b[in_pix];
    if (wr) buf_b[pix_q] <= sum_b;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pix <= '0; out_a <= '0; out_b <= '0;
    end else begin
      out_valid <= v_q && last_q;
      out_pix   <= pix_q;
      out_a     <= sum_a;
      out_b     <= sum_b;
    end
  end
endmodule

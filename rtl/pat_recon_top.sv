// Photoacoustic image reconstructor: eight DAS modules and the shared datapath.
//
// Each of the LANES DAS modules turns one transducer channel into a channel
// image by table look-up; per pixel the channel combiner merges the lanes
// (sums, squares or signed square roots, by algorithm), the frame accumulator
// adds the imaging cycles of a frame together, and the post-processor applies
// the final square, division or subtraction. The controller sequences it all.
// An array of N channels is reconstructed in N/LANES imaging cycles, each
// taking the N/LANES-th channel group from every lane's table set.
//
// Interface:
//   tbl_*    fill the delay tables (only while idle); tbl_addr = set*NPIX+pixel,
//            one value per lane, written where tbl_we[lane] is set.
//   start    with cfg_mode (DAS, DAS-CF, DMAS), cfg_cycles and cfg_npix.
//   s_*      sensor data, valid/ready, one sample per lane per beat, k beats
//            per imaging cycle, lane l of imaging cycle c = channel c*LANES+l.
//   pix_*    the image, pixel 0..cfg_npix-1 in order, one per clock, during the
//            last imaging cycle; no back-pressure. done pulses after pix_last.
// Latency from a pixel's read-out issue to its output: 43 clocks (RAM2 1,
// combiner 18, accumulator 2, post-processor 22).
module pat_recon_top
  import pat_pkg::*;
#(
  parameter int unsigned LANES = 8,
  parameter int unsigned K     = 2048,
  parameter int unsigned NPIX  = 65536,
  parameter int unsigned SETS  = 16,
  localparam int unsigned TAU_W = $clog2(K),
  localparam int unsigned PIX_W = $clog2(NPIX),
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned TA_W  = $clog2(SETS * NPIX),
  localparam int unsigned CYC_W = $clog2(SETS + 1),
  localparam int unsigned NP_W  = $clog2(NPIX + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // delay-table initialisation
  input  logic [LANES-1:0]           tbl_we,
  input  logic [TA_W-1:0]            tbl_addr,
  input  logic [TAU_W-1:0]           tbl_data [LANES],
  // frame control
  input  logic                       start,
  input  mode_e                      cfg_mode,
  input  logic [CYC_W-1:0]           cfg_cycles,
  input  logic [NP_W-1:0]            cfg_npix,
  output logic                       busy,
  output logic                       done,
  // sensor data
  input  logic                       s_valid,
  output logic                       s_ready,
  input  logic signed [SAMPLE_W-1:0] s_data [LANES],
  // image out
  output logic                       pix_valid,
  output logic [PIX_W-1:0]           pix_index,
  output logic signed [OUT_W-1:0]    pix_data,
  output logic                       pix_last
);
  mode_e            mode;
  logic [NP_W-1:0]  npix;
  logic             s_we;
  logic [TAU_W-1:0] s_addr;
  logic             map_en;
  logic [SET_W-1:0] map_set;
  logic [PIX_W-1:0] map_pix;
  logic             rd_en, rd_first, rd_last;
  logic [PIX_W-1:0] rd_pix;

  das_controller #(.K(K), .NPIX(NPIX), .SETS(SETS)) u_ctrl (
    .clk, .rst_n, .start, .cfg_mode, .cfg_cycles, .cfg_npix,
    .s_valid, .s_ready, .s_we, .s_addr,
    .map_en, .map_set, .map_pix,
    .rd_en, .rd_pix, .rd_first, .rd_last,
    .pix_last, .mode, .npix, .busy, .done
  );

  logic signed [SAMPLE_W-1:0] lane_px [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_das
    das_module #(.K(K), .NPIX(NPIX), .SETS(SETS), .SAMPLE_W(SAMPLE_W)) u_das (
      .clk, .rst_n,
      .s_we, .s_addr, .s_data(s_data[l]),
      .tbl_we(tbl_we[l]), .tbl_addr, .tbl_data(tbl_data[l]),
      .map_en, .map_set, .map_pix,
      .rd_pix, .rd_data(lane_px[l])
    );
  end

  // RAM2 answers one clock after the read-out address
  logic             rd_v_q, rd_first_q, rd_last_q;
  logic [PIX_W-1:0] rd_pix_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_v_q <= 1'b0; rd_first_q <= 1'b0; rd_last_q <= 1'b0; rd_pix_q <= '0;
    end else begin
      rd_v_q <= rd_en; rd_first_q <= rd_first; rd_last_q <= rd_last; rd_pix_q <= rd_pix;
    end
  end

  logic                      c_valid;
  logic [PIX_W-1:0]          c_pix;
  logic signed [ACC_A_W-1:0] c_a;
  logic [ACC_B_W-1:0]        c_b;

  channel_combiner #(.LANES(LANES), .NPIX(NPIX)) u_comb (
    .clk, .rst_n, .mode, .in_valid(rd_v_q), .in_pix(rd_pix_q), .lanes(lane_px),
    .out_valid(c_valid), .out_pix(c_pix), .a(c_a), .b(c_b)
  );

  // first/last flags wait for the combiner
  logic [COMB_LAT-1:0] first_d, last_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_d <= '0; last_d <= '0;
    end else begin
      first_d <= {first_d[COMB_LAT-2:0], rd_first_q};
      last_d  <= {last_d[COMB_LAT-2:0], rd_last_q};
    end
  end

  logic                      f_valid;
  logic [PIX_W-1:0]          f_pix;
  logic signed [ACC_A_W-1:0] f_a;
  logic [ACC_B_W-1:0]        f_b;

  frame_accumulator #(.NPIX(NPIX), .A_W(ACC_A_W), .B_W(ACC_B_W)) u_acc (
    .clk, .rst_n, .in_valid(c_valid), .in_pix(c_pix), .in_a(c_a), .in_b(c_b),
    .first(first_d[COMB_LAT-1]), .last(last_d[COMB_LAT-1]),
    .out_valid(f_valid), .out_pix(f_pix), .out_a(f_a), .out_b(f_b)
  );

  post_processor #(.NPIX(NPIX)) u_post (
    .clk, .rst_n, .mode, .in_valid(f_valid), .in_pix(f_pix), .a(f_a), .b(f_b),
    .out_valid(pix_valid), .out_pix(pix_index), .out_data(pix_data)
  );

  assign pix_last = pix_valid && (pix_index == PIX_W'(npix - 1'b1));

  a_table_write_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (tbl_we != '0) |-> !busy) else $error("delay table written while busy");
endmodule

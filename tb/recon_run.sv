// Testbench helper: reconstructs one frame of a ring-array phantom on a
// pat_recon_top instance and checks it.
//
// The array has CHANNELS elements evenly on a 30 mm ring around a 20 mm x
// 20 mm region imaged at IMG_W x IMG_W pixels, sampled at 40 MSPS with sound at
// 1500 m/s; delay tables are tau = round(distance * fs / c). Lane l of imaging
// cycle c is element LANES*c + l. Three point absorbers give triangular pulses
// at their delays, clipped to 16 bits. After `go` the tables are loaded, one
// frame in mode MODE is reconstructed, every pixel is compared with the
// reference model and the frame length with CHANNELS/LANES*(k + npix) + npix +
// 43 clocks. The DUT's own parameters are DUT_NPIX and DUT_SETS (0 = its
// defaults); `fin` rises when done, with the check and failure counts.
module recon_run
  import pat_pkg::*;
  import pat_ref_pkg::*;
#(
  parameter int IMG_W    = 64,
  parameter int CHANNELS = 128,
  parameter int DUT_NPIX = 0,
  parameter int DUT_SETS = 0,
  parameter int MODE     = 1
) (
  input  logic clk,
  input  logic go,
  output logic fin,
  output int   checks,
  output int   failures,
  output int   frame_clocks
);
  localparam int unsigned LANES = 8, K = 2048;
  localparam int unsigned NPIX  = (DUT_NPIX == 0) ? 65536 : DUT_NPIX;
  localparam int unsigned SETS  = (DUT_SETS == 0) ? 16 : DUT_SETS;
  localparam int unsigned NP    = IMG_W * IMG_W;
  localparam int unsigned NCYC  = CHANNELS / LANES;
  localparam int unsigned TAU_W = $clog2(K), PIX_W = $clog2(NPIX), TA_W = $clog2(SETS * NPIX);
  localparam int unsigned CYC_W = $clog2(SETS + 1), NP_W = $clog2(NPIX + 1);
  localparam int unsigned LAT = 43, NSRC = 3;
  localparam real PI = 3.14159265358979, R_MM = 30.0, ROI_MM = 20.0, FS = 40.0e6, C = 1500.0;

  logic rst_n = 0;
  logic [LANES-1:0] tbl_we = '0;
  logic [TA_W-1:0] tbl_addr = '0;
  logic [TAU_W-1:0] tbl_data [LANES];
  logic start = 0, busy, done;
  mode_e cfg_mode = MODE_DAS;
  logic [CYC_W-1:0] cfg_cycles = '0;
  logic [NP_W-1:0] cfg_npix = '0;
  logic s_valid = 0, s_ready;
  logic signed [SAMPLE_W-1:0] s_data [LANES];
  logic pix_valid, pix_last;
  logic [PIX_W-1:0] pix_index;
  logic signed [OUT_W-1:0] pix_data;

  shortint tbl [LANES][NCYC][NP];
  int sen [NCYC][LANES][K];
  int n_pix = 0;

  if (DUT_NPIX == 0 && DUT_SETS == 0) begin : g_default
    pat_recon_top dut (.*);
  end else begin : g_sized
    pat_recon_top #(.NPIX(NPIX), .SETS(SETS)) dut (.*);
  end

  function automatic int delay_samples(int elem, int px, int py);
    real ex, ey, x, y, d;
    ex = R_MM * $cos(2.0 * PI * elem / CHANNELS);
    ey = R_MM * $sin(2.0 * PI * elem / CHANNELS);
    x = (px - (IMG_W - 1) / 2.0) * ROI_MM / IMG_W;
    y = (py - (IMG_W - 1) / 2.0) * ROI_MM / IMG_W;
    d = $sqrt((x - ex) * (x - ex) + (y - ey) * (y - ey)) * 1.0e-3;
    return int'(d * FS / C);
  endfunction

  always @(negedge clk) if (rst_n && pix_valid) begin
    int s [];
    longint want;
    s = new[NCYC * LANES];
    for (int c = 0; c < NCYC; c++)
      for (int l = 0; l < LANES; l++) s[c * LANES + l] = sen[c][l][tbl[l][c][int'(pix_index)]];
    want = pixel(MODE, s, NCYC * LANES);
    checks++;
    if (pix_data != want || int'(pix_index) != n_pix) begin
      failures++;
      if (failures < 10) $display("%0dx%0d/%0d ch pix %0d: got %0d want %0d", IMG_W, IMG_W, CHANNELS, pix_index, pix_data, want);
    end
    n_pix++;
  end

  initial begin
    int t0, tl;
    fin = 0; checks = 0; failures = 0; frame_clocks = 0;
    for (int l = 0; l < LANES; l++) begin tbl_data[l] = '0; s_data[l] = '0; end
    wait (go);
    for (int c = 0; c < NCYC; c++)
      for (int l = 0; l < LANES; l++) begin
        int e;
        e = c * LANES + l;
        for (int k = 0; k < K; k++) sen[c][l][k] = ((k * 37 + e * 11) % 61) - 30;
        for (int n = 0; n < NSRC; n++) begin
          int tc;
          tc = delay_samples(e, IMG_W * (2 + 3 * n) / 12, IMG_W * (3 + 2 * n) / 10);
          for (int d = -6; d <= 6; d++) sen[c][l][tc + d] += 3000 * (7 - ((d < 0) ? -d : d));
        end
        for (int k = 0; k < K; k++) sen[c][l][k] = (sen[c][l][k] > 32767) ? 32767
                                                 : (sen[c][l][k] < -32768) ? -32768 : sen[c][l][k];
        for (int p = 0; p < NP; p++) tbl[l][c][p] = shortint'(delay_samples(e, p % IMG_W, p / IMG_W));
      end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < NCYC; c++)
      for (int p = 0; p < NP; p++) begin
        tbl_we = '1; tbl_addr = TA_W'(c * NPIX + p);
        for (int l = 0; l < LANES; l++) tbl_data[l] = TAU_W'(tbl[l][c][p]);
        @(negedge clk);
      end
    tbl_we = '0;
    @(negedge clk);
    cfg_mode = mode_e'(MODE); cfg_cycles = CYC_W'(NCYC); cfg_npix = NP_W'(NP); start = 1;
    t0 = $time;
    @(negedge clk); start = 0;
    tl = -1;
    for (int c = 0; c < NCYC; c++) begin
      for (int beat = 0; beat < K; beat++) begin
        s_valid = 1;
        for (int l = 0; l < LANES; l++) s_data[l] = SAMPLE_W'(sen[c][l][beat]);
        do @(posedge clk); while (!s_ready);
        @(negedge clk);
      end
      s_valid = 0;
    end
    while (!done) begin
      @(negedge clk);
      if (pix_last) tl = $time;
    end
    frame_clocks = (tl - t0) / 5;
    checks++;
    if (n_pix != NP) begin failures++; $display("%0d pixels, want %0d", n_pix, NP); end
    checks++;
    if (frame_clocks != NCYC * (K + NP) + NP + LAT) begin
      failures++; $display("frame length %0d, want %0d", frame_clocks, NCYC * (K + NP) + NP + LAT);
    end
    fin = 1;
  end
endmodule

// Full-size test of pat_recon_top with its default parameters: 8 lanes,
// k = 2048 samples, a 256x256 image and 16 table sets, i.e. a 128-element
// ring array reconstructed in 16 imaging cycles.
//
// The delay tables come from the evaluated geometry: 128 elements evenly on a
// ring of 30 mm radius around a 20 mm x 20 mm region, 40 MSPS and 1500 m/s,
// tau = round(distance * fs / c). Lane l of imaging cycle c is element
// 8*c + l. The sensor data are the signals of three point absorbers (a
// triangular pulse at each one's delay) plus a small deterministic ripple,
// clipped to the 16-bit sample range.
// One DAS, one DAS-CF and one DMAS frame are run; every pixel is compared with
// an independent model, the frame length must be 16*(2048 + 65536) + 65536 + 43
// clocks, and the brightest DAS pixel must lie within two pixels of an
// absorber.
module tb_pat_recon_full;
  import pat_pkg::*;
  import pat_ref_pkg::*;
  localparam int unsigned LANES = 8, K = 2048, NPIX = 65536, SETS = 16, W = 256;
  localparam int unsigned TAU_W = 11, PIX_W = 16, TA_W = 20, CYC_W = 5, NP_W = 17;
  localparam int unsigned LAT = 43, NSRC = 3;
  localparam real PI = 3.14159265358979, R_MM = 30.0, ROI_MM = 20.0, FS = 40.0e6, C = 1500.0;

  logic clk = 0, rst_n = 0;
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

  int tbl [LANES][SETS][NPIX];
  int sen [SETS][LANES][K];
  int src_x [NSRC] = '{100, 170, 128};
  int src_y [NSRC] = '{90, 120, 200};
  int checks = 0, failures = 0, cyc = 0;
  int n_pix, fr_mode, best_pix;
  longint best_val;

  pat_recon_top dut (.*);

  always #2.5 clk = ~clk;   // 200 MHz
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (12_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int delay_samples(int elem, int px, int py);
    real ex, ey, x, y, d;
    ex = R_MM * $cos(2.0 * PI * elem / 128.0);
    ey = R_MM * $sin(2.0 * PI * elem / 128.0);
    x = (px - 127.5) * ROI_MM / W;
    y = (py - 127.5) * ROI_MM / W;
    d = $sqrt((x - ex) * (x - ex) + (y - ey) * (y - ey)) * 1.0e-3;
    return int'(d * FS / C);
  endfunction

  function automatic longint expect_pix(int p);
    int s [];
    s = new[SETS * LANES];
    for (int c = 0; c < SETS; c++)
      for (int l = 0; l < LANES; l++) s[c * LANES + l] = sen[c][l][tbl[l][c][p]];
    return pixel(fr_mode, s, SETS * LANES);
  endfunction

  always @(negedge clk) if (rst_n && pix_valid) begin
    longint want;
    want = expect_pix(int'(pix_index));
    checks++;
    if (pix_data != want) begin
      failures++;
      if (failures < 10) $display("mode %0d pix %0d: got %0d want %0d", fr_mode, pix_index, pix_data, want);
    end
    if (int'(pix_index) != n_pix) begin
      failures++; if (failures < 10) $display("pixel order: %0d, want %0d", pix_index, n_pix);
    end
    if (pix_data > best_val) begin best_val = pix_data; best_pix = int'(pix_index); end
    n_pix++;
  end

  task automatic frame(input int m);
    int t0, tl;
    fr_mode = m; n_pix = 0; best_val = -(longint'(1) << 62); best_pix = -1;
    @(negedge clk);
    cfg_mode = mode_e'(m); cfg_cycles = CYC_W'(SETS); cfg_npix = NP_W'(NPIX); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    tl = -1;
    for (int c = 0; c < SETS; c++) begin
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
      if (pix_last) tl = cyc;
    end
    checks++;
    if (n_pix != NPIX) begin failures++; $display("%0d pixels, want %0d", n_pix, NPIX); end
    checks++;
    if (tl - t0 != SETS * (K + NPIX) + NPIX + LAT) begin
      failures++; $display("frame length %0d, want %0d", tl - t0, SETS * (K + NPIX) + NPIX + LAT);
    end
    $display("mode %0d: %0d clocks = %.3f ms at 200 MHz, brightest pixel (%0d,%0d)",
             m, tl - t0, (tl - t0) * 5.0e-6, best_pix % W, best_pix / W);
  endtask

  initial begin
    int near;
    for (int l = 0; l < LANES; l++) begin tbl_data[l] = '0; s_data[l] = '0; end
    // tables and signals of the ring geometry
    for (int c = 0; c < SETS; c++)
      for (int l = 0; l < LANES; l++) begin
        int e;
        e = c * LANES + l;
        for (int k = 0; k < K; k++) sen[c][l][k] = ((k * 37 + e * 11) % 61) - 30;
        for (int n = 0; n < NSRC; n++) begin
          int t0;
          t0 = delay_samples(e, src_x[n], src_y[n]);
          for (int d = -6; d <= 6; d++) sen[c][l][t0 + d] += 3000 * (7 - ((d < 0) ? -d : d));
        end
        // the ADC clips at the 16-bit range
        for (int k = 0; k < K; k++) sen[c][l][k] = (sen[c][l][k] > 32767) ? 32767
                                                 : (sen[c][l][k] < -32768) ? -32768 : sen[c][l][k];
        for (int p = 0; p < NPIX; p++) tbl[l][c][p] = delay_samples(e, p % W, p / W);
      end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < SETS * NPIX; a++) begin
      tbl_we = '1; tbl_addr = TA_W'(a);
      for (int l = 0; l < LANES; l++) tbl_data[l] = TAU_W'(tbl[l][a / NPIX][a % NPIX]);
      @(negedge clk);
    end
    tbl_we = '0;
    frame(0);
    near = 0;
    for (int n = 0; n < NSRC; n++)
      if ((best_pix % W - src_x[n]) ** 2 + (best_pix / W - src_y[n]) ** 2 <= 4) near = 1;
    checks++;
    if (!near) begin failures++; $display("brightest DAS pixel is not at an absorber"); end
    frame(1);
    frame(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

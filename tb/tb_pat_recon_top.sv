// End-to-end test of pat_recon_top at a reduced size (k = 64 samples,
// 64-pixel tables, 4 table sets, 8 lanes). Random delay tables are loaded,
// then frames are reconstructed in every mode with 1 to 4 imaging cycles,
// full and reduced image sizes, sensor-input stalls and all-zero data. Every
// output pixel is compared with an independent model of the three
// algorithms, the pixel order and count are checked, and the stall-free
// frame length must be cycles*(k + pixels) + pixels + 43
// clocks. Each mechanism of
// the design is counted and must occur at least once.
module tb_pat_recon_top;
  import pat_pkg::*;
  import pat_ref_pkg::*;
  localparam int unsigned LANES = 8, K = 64, NPIX = 64, SETS = 4;
  localparam int unsigned TAU_W = 6, PIX_W = 6, TA_W = 8, CYC_W = 3, NP_W = 7;
  localparam int unsigned LAT = 43;

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
  int checks = 0, failures = 0, cyc = 0;
  int n_pix, fr_mode, fr_cycles, fr_npix;
  // mechanisms
  int m_mode [3], m_stall, m_multi, m_single, m_reduced, m_zero_div, m_neg;

  pat_recon_top #(.LANES(LANES), .K(K), .NPIX(NPIX), .SETS(SETS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint expect_pix(int p);
    int s [];
    s = new[fr_cycles * LANES];
    for (int c = 0; c < fr_cycles; c++)
      for (int l = 0; l < LANES; l++) s[c * LANES + l] = sen[c][l][tbl[l][c][p]];
    return pixel(fr_mode, s, fr_cycles * LANES);
  endfunction

  always @(negedge clk) if (rst_n && pix_valid) begin
    longint want;
    want = expect_pix(int'(pix_index));
    checks++;
    if (pix_data != want) begin
      failures++; $display("mode %0d pix %0d: got %0d want %0d", fr_mode, pix_index, pix_data, want);
    end
    checks++;
    if (int'(pix_index) != n_pix) begin failures++; $display("pixel order: %0d, want %0d", pix_index, n_pix); end
    if (fr_mode == 1 && want == 0) m_zero_div++;
    if (pix_data < 0) m_neg++;
    n_pix++;
  end

  task automatic frame(input int m, input int ncyc, input int np, input bit stall, input int amp);
    int t0, tl, beat;
    fr_mode = m; fr_cycles = ncyc; fr_npix = np; n_pix = 0;
    for (int c = 0; c < ncyc; c++)
      for (int l = 0; l < LANES; l++)
        for (int k = 0; k < K; k++)
          sen[c][l][k] = (amp == 0) ? 0 : int'($urandom_range(0, 2 * amp)) - amp;
    @(negedge clk);
    cfg_mode = mode_e'(m); cfg_cycles = CYC_W'(ncyc); cfg_npix = NP_W'(np); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    tl = -1;
    for (int c = 0; c < ncyc; c++) begin
      beat = 0;
      while (beat < K) begin
        s_valid = stall ? ($urandom_range(0, 3) != 0) : 1'b1;
        for (int l = 0; l < LANES; l++) s_data[l] = SAMPLE_W'(sen[c][l][beat]);
        @(posedge clk);
        if (s_valid && s_ready) beat++;
        else if (s_ready) m_stall++;
        @(negedge clk);
        if (pix_last) tl = cyc;
      end
      s_valid = 0;
    end
    // a frame that never finishes counts as a failure; the next one starts
    // after a reset
    while (!done && cyc - t0 < 8 * (ncyc * (K + np) + np + LAT) + 1000) begin
      @(negedge clk);
      if (pix_last) tl = cyc;
    end
    checks++;
    if (!done) begin
      failures++; $display("frame did not finish");
      rst_n = 0; @(negedge clk); rst_n = 1;
    end
    checks++;
    if (n_pix != np) begin failures++; $display("%0d pixels, want %0d", n_pix, np); end
    if (!stall) begin
      checks++;
      if (tl - t0 != ncyc * (K + np) + np + LAT) begin
        failures++; $display("frame length %0d, want %0d", tl - t0, ncyc * (K + np) + np + LAT);
      end
    end
    m_mode[m]++;
    if (ncyc > 1) m_multi++; else m_single++;
    if (np < NPIX) m_reduced++;
    @(negedge clk);
  endtask

  initial begin
    for (int l = 0; l < LANES; l++) begin tbl_data[l] = '0; s_data[l] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // delay tables: all lanes written in parallel
    for (int a = 0; a < SETS * NPIX; a++) begin
      @(negedge clk);
      tbl_we = '1; tbl_addr = TA_W'(a);
      for (int l = 0; l < LANES; l++) begin
        tbl[l][a / NPIX][a % NPIX] = $urandom_range(0, K - 1);
        tbl_data[l] = TAU_W'(tbl[l][a / NPIX][a % NPIX]);
      end
    end
    @(negedge clk); tbl_we = '0;
    frame(0, 1, NPIX, 0, 32767);
    frame(1, 4, NPIX, 0, 32767);
    frame(2, 2, NPIX, 0, 32767);
    frame(2, 4, 40, 1, 20000);
    frame(1, 3, 37, 1, 1000);
    frame(1, 1, NPIX, 0, 0);
    frame(0, 4, 16, 1, 32767);
    frame(2, 1, 4, 0, 500);
    checks++; if (m_mode[0] == 0) begin failures++; $display("DAS never ran"); end
    checks++; if (m_mode[1] == 0) begin failures++; $display("DAS-CF never ran"); end
    checks++; if (m_mode[2] == 0) begin failures++; $display("DMAS never ran"); end
    checks++; if (m_stall == 0) begin failures++; $display("no sensor stall"); end
    checks++; if (m_multi == 0 || m_single == 0) begin failures++; $display("imaging-cycle counts not covered"); end
    checks++; if (m_reduced == 0) begin failures++; $display("no reduced image"); end
    checks++; if (m_zero_div == 0) begin failures++; $display("DAS-CF zero divisor never seen"); end
    checks++; if (m_neg == 0) begin failures++; $display("no negative pixel"); end
    $display("mechanisms: DAS %0d DAS-CF %0d DMAS %0d stalls %0d multi-cycle %0d single-cycle %0d reduced %0d zero-divisor %0d negative %0d",
             m_mode[0], m_mode[1], m_mode[2], m_stall, m_multi, m_single, m_reduced, m_zero_div, m_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

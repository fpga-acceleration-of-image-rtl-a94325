// Self-checking test of das_controller with k = 8, 8 pixels, up to 4
// imaging cycles. It counts the accepted sensor beats, mapping and read-out
// pixels per imaging cycle, checks their addresses, sets and first/last
// flags, stalls the sensor input at random, answers pix_last a fixed time
// after the last read-out, and checks done, the latched configuration and the
// stall-free frame length cycles*(k + npix) + npix, with the read-out of
// each imaging cycle sharing the next cycle's mapping pass.
module tb_das_controller;
  import pat_pkg::*;
  localparam int unsigned K = 8, NPIX = 8, SETS = 4;
  logic clk = 0, rst_n = 0, start = 0, s_valid = 0, pix_last = 0;
  mode_e cfg_mode = MODE_DAS, mode;
  logic [2:0] cfg_cycles = '0;
  logic [3:0] cfg_npix = '0, npix;
  logic s_ready, s_we, map_en, rd_en, rd_first, rd_last, busy, done;
  logic [2:0] s_addr, map_pix, rd_pix;
  logic [1:0] map_set;
  int checks = 0, failures = 0, stalls = 0;
  int n_s, n_map, n_rd, n_done, cur_cyc, last_rd_at, cyc, fr_cycles;
  bit stall_on;

  das_controller #(.K(K), .NPIX(NPIX), .SETS(SETS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  // monitor: addresses come in order within each phase
  always @(negedge clk) if (rst_n) begin
    s_valid = stall_on ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (s_ready && !s_valid) stalls++;
    pix_last = (last_rd_at >= 0 && cyc == last_rd_at + 5);
  end
  always @(posedge clk) if (rst_n) begin
    if (s_we) begin
      chk(int'(s_addr) == n_s % K, "sensor address order");
      n_s++;
    end
    if (map_en) begin
      chk(int'(map_pix) == n_map % int'(npix), "map pixel order");
      chk(int'(map_set) == n_map / int'(npix), "map set = imaging cycle");
      n_map++;
    end
    if (rd_en) begin
      cur_cyc = n_rd / int'(npix);
      chk(int'(rd_pix) == n_rd % int'(npix), "read-out pixel order");
      chk(rd_first == (cur_cyc == 0), "first flag");
      chk(rd_last == (cur_cyc == fr_cycles - 1), "last flag");
      chk(!s_we, "no sensor write during read-out");
      chk(!map_en || (map_pix == rd_pix && int'(map_set) == cur_cyc + 1), "read-out shares the next mapping pass");
      n_rd++;
      if (rd_last && n_rd % int'(npix) == 0) last_rd_at = cyc;
    end
    if (done) n_done++;
  end

  task automatic frame(input int ncyc, input int np, input mode_e m, input bit stall);
    int t0, t1;
    fr_cycles = ncyc;
    n_s = 0; n_map = 0; n_rd = 0; n_done = 0; last_rd_at = -1; stall_on = stall;
    @(negedge clk);
    cfg_cycles = 3'(ncyc); cfg_npix = 4'(np); cfg_mode = m; start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    cfg_mode = MODE_DAS; cfg_cycles = 3'd1; cfg_npix = 4'd4;   // latched values must stay
    while (!done) @(negedge clk);
    t1 = cyc;
    @(negedge clk);
    chk(n_s == ncyc * K, "sensor beats per frame");
    chk(n_map == ncyc * np, "mapped pixels per frame");
    chk(n_rd == ncyc * np, "read-out pixels per frame");
    chk(n_done == 1, "one done pulse");
    chk(mode == m && int'(npix) == np, "configuration latched");
    chk(!busy, "idle after the frame");
    // issue ends at t0 + ncyc*(K+np) + np; pix_last 5 clocks later, done 1 after
    if (!stall) chk(t1 - t0 == ncyc * (K + np) + np + 6, $sformatf("frame length %0d", t1 - t0));
  endtask

  initial begin
    cyc = 0; stall_on = 0; last_rd_at = -1;
    repeat (2) @(negedge clk); rst_n = 1;
    frame(1, 8, MODE_DAS, 0);
    frame(4, 8, MODE_DMAS, 0);
    frame(3, 5, MODE_DAS_CF, 1);
    frame(2, 4, MODE_DAS, 0);
    frame(1, 4, MODE_DAS_CF, 1);
    chk(stalls > 0, "sensor stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

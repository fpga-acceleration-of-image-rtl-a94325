// Self-checking test of das_module: two table sets with random sample
// numbers are written, then for each set new sensor data are loaded into
// RAM1, the mapping pass runs one pixel per clock, and RAM2 is read back:
// pixel p must hold sensor[table[set][p]]. Also checks that a pixel's RAM2
// word is written three clocks after its map_en (readable from then on) and
// that a mapping pass with map_en gaps maps exactly the issued pixels, and
// that reading RAM2 at the pixel being mapped returns the previous pass's
// value (read-out of one imaging cycle during the next one's mapping).
module tb_das_module;
  localparam int unsigned K = 32, NPIX = 16, SETS = 2, SAMPLE_W = 16;
  localparam int unsigned TAU_W = 5, PIX_W = 4, SET_W = 1, TA_W = 5;
  logic clk = 0, rst_n = 0;
  logic s_we = 0, tbl_we = 0, map_en = 0;
  logic [TAU_W-1:0] s_addr = '0, tbl_data = '0;
  logic [SAMPLE_W-1:0] s_data = '0, rd_data;
  logic [TA_W-1:0] tbl_addr = '0;
  logic [SET_W-1:0] map_set = '0;
  logic [PIX_W-1:0] map_pix = '0, rd_pix = '0;
  int tbl [SETS][NPIX];
  int sen [K];
  logic [SAMPLE_W-1:0] prev [NPIX];
  int checks = 0, failures = 0;

  das_module #(.K(K), .NPIX(NPIX), .SETS(SETS), .SAMPLE_W(SAMPLE_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(input int set, input bit gaps);
    for (int p = 0; p < NPIX; p++) begin
      @(negedge clk); rd_pix = PIX_W'(p);
      @(negedge clk);
      checks++;
      if (gaps && p % 2 == 1) begin
        if (rd_data !== SAMPLE_W'(16'hDEAD)) begin failures++; $display("unissued pixel %0d written", p); end
      end else if (rd_data !== SAMPLE_W'(sen[tbl[set][p]])) begin
        failures++; $display("set %0d pix %0d: got %h want %h", set, p, rd_data, SAMPLE_W'(sen[tbl[set][p]]));
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < SETS; s++)
      for (int p = 0; p < NPIX; p++) begin
        @(negedge clk); tbl_we = 1; tbl_addr = TA_W'(s * NPIX + p);
        tbl[s][p] = $urandom_range(0, K - 1); tbl_data = TAU_W'(tbl[s][p]);
      end
    @(negedge clk); tbl_we = 0;
    for (int s = 0; s < SETS; s++) begin
      for (int k = 0; k < K; k++) begin
        @(negedge clk); s_we = 1; s_addr = TAU_W'(k); sen[k] = int'($urandom & 16'hFFFF); s_data = SAMPLE_W'(sen[k]);
      end
      @(negedge clk); s_we = 0; map_set = SET_W'(s);
      for (int p = 0; p < NPIX; p++) begin
        @(negedge clk); map_en = 1; map_pix = PIX_W'(p); rd_pix = PIX_W'(p);
        if (s > 0) begin
          @(posedge clk); #1;
          checks++;
          if (rd_data !== prev[p]) begin failures++; $display("shared pass pix %0d: got %h want %h", p, rd_data, prev[p]); end
        end
      end
      @(negedge clk); map_en = 0;
      for (int p = 0; p < NPIX; p++) prev[p] = SAMPLE_W'(sen[tbl[s][p]]);
      repeat (3) @(negedge clk);
      read_check(s, 0);
    end
    // write-to-read timing: pixel 0 of set 0 mapped at edge t lands in RAM2 at t+2
    @(negedge clk); map_set = 0; map_pix = 0; map_en = 1; rd_pix = 0;
    @(negedge clk); map_en = 0;
    @(negedge clk);
    @(negedge clk);   // RAM2 written at the last edge, read registered at the next
    @(negedge clk);
    checks++; if (rd_data !== SAMPLE_W'(sen[tbl[0][0]])) begin failures++; $display("map latency wrong"); end
    // fill RAM2 with a marker by mapping through a table entry that points at it
    @(negedge clk); s_we = 1; s_addr = TAU_W'(tbl[1][0]); s_data = 16'hDEAD; sen[tbl[1][0]] = 16'hDEAD;
    @(negedge clk); s_we = 0; map_set = 1;
    // overwrite set 1 table so every pixel points at the marker, map all
    for (int p = 0; p < NPIX; p++) begin
      @(negedge clk); tbl_we = 1; tbl_addr = TA_W'(NPIX + p); tbl_data = TAU_W'(tbl[1][0]);
    end
    @(negedge clk); tbl_we = 0;
    for (int p = 0; p < NPIX; p++) begin @(negedge clk); map_en = 1; map_pix = PIX_W'(p); end
    @(negedge clk); map_en = 0;
    // new data, then map only even pixels with the original set 0 table
    for (int k = 0; k < K; k++) begin
      @(negedge clk); s_we = 1; s_addr = TAU_W'(k);
      sen[k] = (k == tbl[1][0]) ? 16'hDEAD : int'($urandom & 16'h7FFF); s_data = SAMPLE_W'(sen[k]);
    end
    @(negedge clk); s_we = 0; map_set = 0;
    for (int p = 0; p < NPIX; p += 2) begin
      @(negedge clk); map_en = 1; map_pix = PIX_W'(p);
      @(negedge clk); map_en = 0;
    end
    repeat (3) @(negedge clk);
    read_check(0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

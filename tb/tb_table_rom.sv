// Self-checking test of table_rom: two table sets are written through the
// initialisation port with distinct values, then every entry of both sets is
// read back in pixel order and compared, with the one-clock read latency.
module tb_table_rom;
  localparam int unsigned NPIX = 32, SETS = 2, TAU_W = 11, AW = $clog2(SETS * NPIX);
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [TAU_W-1:0] wdata = '0, rdata;
  logic [TAU_W-1:0] model [SETS * NPIX];
  int checks = 0, failures = 0;

  table_rom #(.NPIX(NPIX), .SETS(SETS), .TAU_W(TAU_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < SETS * NPIX; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wdata = TAU_W'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int s = 0; s < SETS; s++)
      for (int p = 0; p < NPIX; p++) begin
        raddr = AW'(s * NPIX + p);
        @(posedge clk); #1;
        checks++;
        if (rdata !== model[s * NPIX + p]) begin
          failures++; $display("set %0d pix %0d: got %0d want %0d", s, p, rdata, model[s*NPIX+p]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

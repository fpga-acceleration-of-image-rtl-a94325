// Self-checking test of frame_accumulator: three imaging cycles over 16
// pixels (first, middle, last, pixels in a shuffled order in the middle
// cycle), then a second frame of one imaging cycle (first and last at once).
// Only the last cycle may produce output; each output must be the sum of that
// pixel's partials of the frame, two clocks after the last partial.
module tb_frame_accumulator;
  localparam int unsigned NPIX = 16, A_W = 32, B_W = 48;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, last = 0, out_valid;
  logic [3:0] in_pix = '0, out_pix;
  logic signed [A_W-1:0] in_a = '0, out_a;
  logic [B_W-1:0] in_b = '0, out_b;
  longint sa [NPIX];
  longint unsigned sb [NPIX];
  int sent_at [NPIX];
  int checks = 0, failures = 0, cyc = 0, nout = 0;

  frame_accumulator #(.NPIX(NPIX), .A_W(A_W), .B_W(B_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pass(input bit f, input bit l, input bit shuffle);
    for (int i = 0; i < NPIX; i++) begin
      int p;
      p = shuffle ? (i * 5 + 3) % NPIX : i;
      @(negedge clk);
      in_valid = 1; first = f; last = l; in_pix = 4'(p);
      in_a = A_W'($signed($urandom)) >>> 4; in_b = B_W'($urandom) << 8;
      if (f) begin sa[p] = 0; sb[p] = 0; end
      sa[p] += longint'(in_a); sb[p] += longint'(in_b); sent_at[p] = cyc;
      // a gap now and then
      if ($urandom_range(0, 3) == 0) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk); in_valid = 0;
    repeat (6) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    pass(1, 0, 0); pass(0, 0, 1);
    checks++; if (nout != 0) begin failures++; $display("output before the last cycle"); end
    pass(0, 1, 0);
    checks++; if (nout != NPIX) begin failures++; $display("%0d outputs, want %0d", nout, NPIX); end
    nout = 0;
    pass(1, 1, 1);
    checks++; if (nout != NPIX) begin failures++; $display("%0d outputs, want %0d", nout, NPIX); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (longint'(out_a) != sa[out_pix] || longint'(out_b) != sb[out_pix]) begin
      failures++; $display("pix %0d: %0d %0d want %0d %0d", out_pix, out_a, out_b, sa[out_pix], sb[out_pix]);
    end
    checks++;
    if (cyc - sent_at[out_pix] != 2) begin failures++; $display("latency %0d", cyc - sent_at[out_pix]); end
    nout++;
  end
endmodule

// Self-checking test of signed_sqrt: a new sample every clock (random and
// extremes); y must equal sign(x)*floor(sqrt(|x|*2^16)) and mag |x|*2^16,
// 17 clocks (abs 1 + root 16) after the sample.
module tb_signed_sqrt;
  import pat_ref_pkg::*;
  localparam int unsigned IN_W = 16, LAT = 17, N = 500;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [IN_W-1:0] x = '0;
  logic signed [IN_W+1:0] y;
  logic [2*IN_W-1:0] mag;
  int xs [N];
  int sent_at [N];
  int checks = 0, failures = 0, cyc = 0, got = 0;

  signed_sqrt #(.IN_W(IN_W), .FRAC(8)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++)
      xs[i] = (i == 0) ? -32768 : (i == 1) ? 32767 : (i == 2) ? 0 : (i == 3) ? -1
            : int'($signed(16'($urandom)));
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); in_valid = 1; x = IN_W'(xs[i]); sent_at[i] = cyc;
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 4) @(negedge clk);
    checks++;
    if (got != N) begin failures++; $display("got %0d results, want %0d", got, N); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int s;
    longint want_y, want_m;
    s = xs[got];
    want_y = sroot(s);
    want_m = longint'((s < 0) ? -s : s) << 16;
    checks++;
    if (longint'(y) != want_y || longint'(mag) != want_m) begin
      failures++; $display("x=%0d: y=%0d mag=%0d, want %0d %0d", s, y, mag, want_y, want_m);
    end
    checks++;
    if (cyc - sent_at[got] != LAT) begin
      failures++; $display("latency %0d, want %0d", cyc - sent_at[got], LAT);
    end
    got++;
  end
endmodule

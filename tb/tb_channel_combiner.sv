// Self-checking test of channel_combiner in all three modes: a new set of
// eight random samples every clock; A and B must match the testbench's sums
// (s, s^2, sign(s)sqrt|s|, |s|*2^16), the pixel index must travel along and
// every result must leave exactly 18 clocks after its samples.
module tb_channel_combiner;
  import pat_pkg::*;
  import pat_ref_pkg::*;
  localparam int unsigned LANES = 8, NPIX = 256, LAT = 18, N = 300;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  mode_e mode = MODE_DAS;
  logic [7:0] in_pix = '0, out_pix;
  logic signed [SAMPLE_W-1:0] lanes [LANES];
  logic signed [ACC_A_W-1:0] a;
  logic [ACC_B_W-1:0] b;
  int smp [N][LANES];
  int sent_at [N];
  int checks = 0, failures = 0, cyc = 0, got = 0;

  channel_combiner #(.LANES(LANES), .NPIX(NPIX)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < LANES; l++) lanes[l] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      mode = mode_e'(m);
      got = 0;
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        in_valid = 1; in_pix = 8'(i); sent_at[i] = cyc;
        for (int l = 0; l < LANES; l++) begin
          smp[i][l] = (i == 0) ? -32768 : (i == 1) ? 32767 : int'($signed(16'($urandom)));
          lanes[l] = SAMPLE_W'(smp[i][l]);
        end
      end
      @(negedge clk); in_valid = 0;
      repeat (LAT + 4) @(negedge clk);
      checks++;
      if (got != N) begin failures++; $display("mode %0d: got %0d results", m, got); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    longint wa;
    longint unsigned wb;
    wa = 0; wb = 0;
    for (int l = 0; l < LANES; l++) begin
      int s;
      s = smp[got][l];
      unique case (mode)
        MODE_DAS:    wa += s;
        MODE_DAS_CF: begin wa += s; wb += longint'(s) * longint'(s); end
        default:     begin wa += sroot(s); wb += longint'((s < 0) ? -s : s) << 16; end
      endcase
    end
    checks++;
    if (longint'(a) != wa || longint'(b) != wb || out_pix != 8'(got)) begin
      failures++;
      $display("mode %0d pix %0d: a=%0d b=%0d pix=%0d, want %0d %0d", mode, got, a, b, out_pix, wa, wb);
    end
    checks++;
    if (cyc - sent_at[got] != LAT) begin failures++; $display("latency %0d", cyc - sent_at[got]); end
    got++;
  end
endmodule

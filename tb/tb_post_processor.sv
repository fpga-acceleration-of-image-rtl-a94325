// Self-checking test of post_processor in all three modes: a new (A, B) pair
// every clock, consistent with a real channel set (B >= A^2/N for DAS-CF,
// B close to the sum of squared roots for DMAS) plus B = 0; results must match
// A, min(A^2*2^10/B, 2^20-1) and (A^2-B)>>1, 22 clocks after the input.
module tb_post_processor;
  import pat_pkg::*;
  localparam int unsigned NPIX = 256, LAT = 22, N = 300;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  mode_e mode = MODE_DAS;
  logic [7:0] in_pix = '0, out_pix;
  logic signed [ACC_A_W-1:0] a = '0;
  logic [ACC_B_W-1:0] b = '0;
  logic signed [OUT_W-1:0] out_data;
  longint as_ [N];
  longint unsigned bs [N];
  int sent_at [N];
  int checks = 0, failures = 0, cyc = 0, got = 0;

  post_processor #(.NPIX(NPIX)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      mode = mode_e'(m);
      got = 0;
      for (int i = 0; i < N; i++) begin
        longint av;
        longint unsigned bv;
        av = longint'($signed($urandom)) >>> $urandom_range(7, 20);   // up to about 2^24
        bv = longint'(av * av) / 128 + longint'($urandom);            // DAS-CF: N = 128
        if (i == 3) begin av = 0; bv = 0; end
        if (i == 4) begin av = -(longint'(1) << 23); bv = longint'(av * av) / 128; end
        as_[i] = av; bs[i] = bv;
        @(negedge clk);
        in_valid = 1; in_pix = 8'(i); a = ACC_A_W'(av); b = ACC_B_W'(bv); sent_at[i] = cyc;
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
    longint want;
    longint unsigned q;
    unique case (mode)
      MODE_DAS: want = as_[got];
      MODE_DAS_CF: begin
        if (bs[got] == 0) want = 0;
        else begin
          q = (longint'(as_[got] * as_[got]) << 10) / bs[got];
          want = (q > 64'hFFFFF) ? 64'hFFFFF : q;
        end
      end
      default: want = (as_[got] * as_[got] - longint'(bs[got])) >>> 1;
    endcase
    checks++;
    if (out_data != want || out_pix != 8'(got)) begin
      failures++; $display("mode %0d i %0d: got %0d want %0d", mode, got, out_data, want);
    end
    checks++;
    if (cyc - sent_at[got] != LAT) begin failures++; $display("latency %0d", cyc - sent_at[got]); end
    got++;
  end
endmodule

// Self-checking test of cordic_sqrt: a new radicand every clock (random,
// perfect squares and their neighbours, 0 and all ones); each root is
// checked against r*r <= x < (r+1)*(r+1) and must leave exactly 16 clocks
// after its radicand entered.
module tb_cordic_sqrt;
  localparam int unsigned IN_W = 32, LAT = 16, N = 600;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [IN_W-1:0] radicand = '0;
  logic [IN_W/2-1:0] root;
  longint unsigned xs [N];
  int sent_at [N];
  int checks = 0, failures = 0, cyc = 0, got = 0;

  cordic_sqrt #(.IN_W(IN_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      longint unsigned r;
      r = longint'($urandom_range(0, 65535));
      case (i % 4)
        0: xs[i] = longint'($urandom);
        1: xs[i] = r * r;
        2: xs[i] = (r * r == 0) ? 0 : r * r - 1;
        default: xs[i] = (i == 3) ? 64'hFFFF_FFFF : (i == 7) ? 0 : r * r + r;
      endcase
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); in_valid = 1; radicand = IN_W'(xs[i]); sent_at[i] = cyc;
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 4) @(negedge clk);
    checks++;
    if (got != N) begin failures++; $display("got %0d results, want %0d", got, N); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    longint unsigned r, x;
    r = longint'(root); x = xs[got];
    checks++;
    if (!(r * r <= x && (r + 1) * (r + 1) > x)) begin
      failures++; $display("sqrt(%0d) gave %0d", x, r);
    end
    checks++;
    if (cyc - sent_at[got] != LAT) begin
      failures++; $display("latency %0d, want %0d", cyc - sent_at[got], LAT);
    end
    got++;
  end
endmodule

// Self-checking test of divider: a new division every clock, with random
// operands scaled so the quotient fits 20 bits, quotients that overflow
// (expected to saturate) and zero divisors (expected 0); every quotient must
// leave exactly 20 clocks after its operands.
module tb_divider;
  localparam int unsigned NUM_W = 74, DEN_W = 48, Q_W = 20, N = 400;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [NUM_W-1:0] num = '0;
  logic [DEN_W-1:0] den = '0;
  logic [Q_W-1:0] quot;
  logic [NUM_W-1:0] ns [N];
  logic [DEN_W-1:0] ds [N];
  int sent_at [N];
  int checks = 0, failures = 0, cyc = 0, got = 0, nsat = 0, nzero = 0;

  divider #(.NUM_W(NUM_W), .DEN_W(DEN_W), .Q_W(Q_W)) dut (.*);

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
      ds[i] = {$urandom, $urandom} >> $urandom_range(16, 60);
      if (i % 10 == 5) ds[i] = '0;
      // quotient up to 2^21 so some saturate
      ns[i] = NUM_W'(ds[i]) * NUM_W'($urandom_range(0, 2097151)) + NUM_W'($urandom) % (NUM_W'(ds[i]) + 1);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); in_valid = 1; num = ns[i]; den = ds[i]; sent_at[i] = cyc;
    end
    @(negedge clk); in_valid = 0;
    repeat (Q_W + 4) @(negedge clk);
    checks++;
    if (got != N) begin failures++; $display("got %0d results, want %0d", got, N); end
    checks++;
    if (nsat == 0 || nzero == 0) begin failures++; $display("saturation or zero case not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    logic [NUM_W-1:0] q;
    logic [Q_W-1:0] want;
    if (ds[got] == 0) begin want = '0; nzero++; end
    else begin
      q = ns[got] / NUM_W'(ds[got]);
      if (q >= NUM_W'(1) << Q_W) begin want = '1; nsat++; end
      else want = Q_W'(q);
    end
    checks++;
    if (quot !== want) begin
      failures++; $display("%0d / %0d: got %0d want %0d", ns[got], ds[got], quot, want);
    end
    checks++;
    if (cyc - sent_at[got] != Q_W) begin
      failures++; $display("latency %0d, want %0d", cyc - sent_at[got], Q_W);
    end
    got++;
  end
endmodule

// Self-checking test of squarer (^2): random and extreme signed inputs; the
// square must appear exactly one clock after the input (the DSP latency).
module tb_squarer;
  localparam int unsigned IN_W = 16;
  logic clk = 0;
  logic signed [IN_W-1:0] a = '0;
  logic [2*IN_W-1:0] sq;
  int checks = 0, failures = 0;

  squarer #(.IN_W(IN_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint want;
    // a new input every clock; the square of the input of clock t must be
    // present right after edge t+1 and not earlier
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      a = (n == 0) ? -16'sd32768 : (n == 1) ? 16'sd32767 : (n == 2) ? -16'sd1 : IN_W'($urandom);
      want = longint'(a) * longint'(a);
      @(posedge clk); #1;
      checks++;
      if (longint'(sq) != want) begin failures++; $display("a=%0d got %0d want %0d", a, sq, want); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

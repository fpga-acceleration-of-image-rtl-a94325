// Self-checking test of adder_tree (SUM): random signed terms including the
// extremes; the registered sum must equal the testbench's own sum one clock
// after the terms are applied.
module tb_adder_tree;
  localparam int unsigned N = 8, IN_W = 18, OUT_W = IN_W + 3;
  logic clk = 0;
  logic signed [IN_W-1:0]  in_vec [N];
  logic signed [OUT_W-1:0] sum;
  int checks = 0, failures = 0;

  adder_tree #(.N(N), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint want;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      want = 0;
      for (int i = 0; i < N; i++) begin
        case (n)
          0: in_vec[i] = {1'b1, {(IN_W-1){1'b0}}};    // most negative
          1: in_vec[i] = {1'b0, {(IN_W-1){1'b1}}};    // most positive
          default: in_vec[i] = IN_W'($urandom);
        endcase
        want += longint'(in_vec[i]);
      end
      @(posedge clk); #1;
      checks++;
      if (longint'(sum) != want) begin
        failures++; $display("n=%0d got %0d want %0d", n, sum, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

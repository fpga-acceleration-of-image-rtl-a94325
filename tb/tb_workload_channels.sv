// Channel-count sweep of the evaluated system at 256x256 pixels: 256 and 512
// ring elements reconstructed with DMAS in 32 and 64 imaging cycles (128
// elements is the full-size test). Both need builds with more table sets
// (32 and 64) than the default 16. Each frame is checked pixel by pixel and
// its length printed in milliseconds at the 200 MHz clock.
module tb_workload_channels;
  logic clk = 0;
  logic go = 0;
  logic fin [2];
  int ch [2], fl [2], fc [2];
  int checks = 0, failures = 0;
  localparam int CHS [2] = '{256, 512};

  recon_run #(.IMG_W(256), .CHANNELS(256), .DUT_SETS(32), .MODE(2)) r256 (.clk, .go, .fin(fin[0]), .checks(ch[0]), .failures(fl[0]), .frame_clocks(fc[0]));
  recon_run #(.IMG_W(256), .CHANNELS(512), .DUT_SETS(64), .MODE(2)) r512 (.clk, .go, .fin(fin[1]), .checks(ch[1]), .failures(fl[1]), .frame_clocks(fc[1]));

  always #2.5 clk = ~clk;   // 200 MHz

  initial begin : watchdog
    repeat (12_000_000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #10 go = 1;
    wait (fin[0] && fin[1]);
    for (int i = 0; i < 2; i++) begin
      $display("256x256, %0d channels: %0d clocks = %.3f ms", CHS[i], fc[i], fc[i] * 5.0e-6);
      checks += ch[i]; failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

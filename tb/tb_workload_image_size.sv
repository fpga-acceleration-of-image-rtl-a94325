// Image-size sweep of the evaluated system: a 128-element ring array
// reconstructed with DAS-CF at 64x64, 128x128 and 512x512 pixels (256x256 is
// the full-size test). 64x64 and 128x128 run on the default build with a
// reduced run-time image size; 512x512 needs a build with 262144-pixel
// tables. Each frame is checked pixel by pixel and its length printed in
// milliseconds at the 200 MHz clock.
module tb_workload_image_size;
  logic clk = 0;
  logic go = 0;
  logic fin [3];
  int ch [3], fl [3], fc [3];
  int checks = 0, failures = 0;
  localparam int SIZES [3] = '{64, 128, 512};

  recon_run #(.IMG_W(64))                        r64  (.clk, .go, .fin(fin[0]), .checks(ch[0]), .failures(fl[0]), .frame_clocks(fc[0]));
  recon_run #(.IMG_W(128))                       r128 (.clk, .go, .fin(fin[1]), .checks(ch[1]), .failures(fl[1]), .frame_clocks(fc[1]));
  recon_run #(.IMG_W(512), .DUT_NPIX(262144))    r512 (.clk, .go, .fin(fin[2]), .checks(ch[2]), .failures(fl[2]), .frame_clocks(fc[2]));

  always #2.5 clk = ~clk;   // 200 MHz

  initial begin : watchdog
    repeat (12_000_000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #10 go = 1;
    wait (fin[0] && fin[1] && fin[2]);
    for (int i = 0; i < 3; i++) begin
      $display("%0dx%0d, 128 channels: %0d clocks = %.3f ms", SIZES[i], SIZES[i], fc[i], fc[i] * 5.0e-6);
      checks += ch[i]; failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Self-checking test of sensor_ram: random writes, then every address read back
// and compared with a copy kept by the testbench; also checks that the read
// data appear exactly one clock after the address and that a write in the
// same clock as a read of that address returns the old word.
module tb_sensor_ram;
  localparam int unsigned DEPTH = 64, DATA_W = 16, AW = $clog2(DEPTH);
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [DATA_W-1:0] wdata = '0, rdata;
  logic [DATA_W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sensor_ram #(.DEPTH(DEPTH), .DATA_W(DATA_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wdata = DATA_W'($urandom); model[i] = wdata;
    end
    for (int n = 0; n < 200; n++) begin
      @(negedge clk); waddr = AW'($urandom); wdata = DATA_W'($urandom); model[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); raddr = AW'(i);
      @(negedge clk);
      checks++;
      if (rdata !== model[i]) begin
        failures++; $display("addr %0d: got %h want %h", i, rdata, model[i]);
      end
    end
    // read-during-write to the same address gives the old word
    @(negedge clk); raddr = 5; waddr = 5; we = 1; wdata = ~model[5];
    @(negedge clk); we = 0;
    checks++; if (rdata !== model[5]) begin failures++; $display("read-during-write wrong"); end
    @(negedge clk);
    checks++; if (rdata !== DATA_W'(~model[5])) begin failures++; $display("write lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

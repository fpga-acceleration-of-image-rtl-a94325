// RAM1 of a DAS module: the sensor data of one transducer channel.
//
// The controller writes the k samples of the current acquisition in order
// (address = sample number, 0-based); during the mapping pass the delay table
// supplies the read address. One write port and one read port; the read data
// are registered and appear one clock after the address. The depth (k) and the
// sample width are this design's assumptions.
module sensor_ram #(
  parameter int unsigned DEPTH  = 2048,
  parameter int unsigned DATA_W = 16,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule

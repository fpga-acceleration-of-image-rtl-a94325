// RAM2 of a DAS module: the channel's image, one sample value per pixel.
//
// Written during the mapping pass at the pixel's position and read out in
// pixel order afterwards. One write port, one registered read port (data one
// clock after the address).
module image_ram #(
  parameter int unsigned DEPTH  = 65536,
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

// Delay-table ROM of a DAS module.
//
// Entry set*NPIX + p holds, for pixel p (row by row), the sample number at
// which the channel served in imaging cycle `set` received the wave from that
// pixel: tau = l(x,y,i) / c times the sampling rate. The table is fixed for a
// given array and geometry, so it is read-only while images are made; it is
// filled once through the initialisation write port, as an FPGA ROM would be
// filled by the configuration. Keeping one set per imaging cycle (16 sets for
// 128 channels on 8 lanes) is this design's choice. Read latency: one clock.
module table_rom #(
  parameter int unsigned NPIX  = 65536,
  parameter int unsigned SETS  = 16,
  parameter int unsigned TAU_W = 11,
  localparam int unsigned AW   = $clog2(SETS * NPIX)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [TAU_W-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [TAU_W-1:0] rdata
);
  logic [TAU_W-1:0] mem [SETS * NPIX];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule

// DAS module: one channel's delay-and-sum as memory storage and access.
//
// It holds three memories: RAM1 (the channel's k sensor samples), the delay
// table ROM (a sample number for every pixel, one table set per imaging
// cycle) and RAM2 (the channel's image). The flow follows the source's
// workflow: the controller first writes the sensor samples into RAM1; the
// mapping pass then reads the table in pixel order, uses each table value as
// the RAM1 address and stores the sample found there into RAM2 at the pixel's
// position; finally RAM2 is read out in pixel order.
//
// Timing: the mapping pass is pipelined at one pixel per clock. A pixel issued
// with map_en in clock t is looked up in the ROM (t), RAM1 is read with the
// table value (t+1) and the sample is written into RAM2 at the end of t+2.
// rd_data follows rd_pix by one clock. RAM2 reads before it writes, so with
// rd_pix = map_pix the read-out returns the pixel's previous value, the one
// stored by the previous mapping pass: the controller uses this to read out
// one imaging cycle while it maps the next. Writing the table during a mapping pass is not
// allowed (asserted). The one-pixel-per-clock pipeline is this design's
// choice; the source gives the flow but not the timing.
module das_module #(
  parameter int unsigned K        = 2048,
  parameter int unsigned NPIX     = 65536,
  parameter int unsigned SETS     = 16,
  parameter int unsigned SAMPLE_W = 16,
  localparam int unsigned TAU_W   = $clog2(K),
  localparam int unsigned PIX_W   = $clog2(NPIX),
  localparam int unsigned SET_W   = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned TA_W    = $clog2(SETS * NPIX)
) (
  input  logic                clk,
  input  logic                rst_n,
  // sensor data into RAM1
  input  logic                s_we,
  input  logic [TAU_W-1:0]    s_addr,
  input  logic [SAMPLE_W-1:0] s_data,
  // table initialisation
  input  logic                tbl_we,
  input  logic [TA_W-1:0]     tbl_addr,
  input  logic [TAU_W-1:0]    tbl_data,
  // mapping pass
  input  logic                map_en,
  input  logic [SET_W-1:0]    map_set,
  input  logic [PIX_W-1:0]    map_pix,
  // RAM2 read-out
  input  logic [PIX_W-1:0]    rd_pix,
  output logic [SAMPLE_W-1:0] rd_data
);
  logic [TA_W-1:0]     rom_raddr;
  logic [TAU_W-1:0]    tau;
  logic [SAMPLE_W-1:0] sample;
  logic [1:0]          v_q;
  logic [PIX_W-1:0]    pix_q [2];

  assign rom_raddr = TA_W'(map_set) * TA_W'(NPIX) + TA_W'(map_pix);

  table_rom #(.NPIX(NPIX), .SETS(SETS), .TAU_W(TAU_W)) u_rom (
    .clk, .we(tbl_we), .waddr(tbl_addr), .wdata(tbl_data),
    .raddr(rom_raddr), .rdata(tau)
  );

  sensor_ram #(.DEPTH(K), .DATA_W(SAMPLE_W)) u_ram1 (
    .clk, .we(s_we), .waddr(s_addr), .wdata(s_data),
    .raddr(tau), .rdata(sample)
  );

  image_ram #(.DEPTH(NPIX), .DATA_W(SAMPLE_W)) u_ram2 (
    .clk, .we(v_q[1]), .waddr(pix_q[1]), .wdata(sample),
    .raddr(rd_pix), .rdata(rd_data)
  );

  // pixel index and valid travel alongside the ROM and RAM1 reads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q      <= '0;
      pix_q[0] <= '0;
      pix_q[1] <= '0;
    end else begin
      v_q      <= {v_q[0], map_en};
      pix_q[0] <= map_pix;
      pix_q[1] <= pix_q[0];
    end
  end

  a_no_table_write_while_mapping: assert property (
    @(posedge clk) disable iff (!rst_n) !(tbl_we && map_en))
    else $error("table written during a mapping pass");
endmodule

// Controller: sequences the imaging cycles of one frame.
//
// A frame of cfg_cycles imaging cycles (channels / lanes) over cfg_npix pixels
// is started with `start`; the mode and sizes are latched then. Each imaging
// cycle follows the source's workflow: the sensor samples are put into RAM1,
// the delay table is traversed and the samples are stored into RAM2, and the
// image is then read out of RAM2. The phases are
//   LOAD  accept k sensor beats (valid/ready; a beat carries one sample for
//         every lane) and write them into RAM1 at addresses 0..k-1;
//   MAP   traverse the delay table, one pixel per clock (map_en, map_pix,
//         map_set = imaging cycle). From the second imaging cycle on, the
//         same pass also reads RAM2 out (rd_en, rd_pix = map_pix): RAM2
//         returns the previous cycle's value of a pixel two clocks before the
//         new value is written there, so the read-out of cycle c-1 shares
//         the pass with the mapping of cycle c;
//   DUMP  after the last MAP, read the last imaging cycle out of RAM2.
// rd_first / rd_last flag the imaging cycle being read out. After DUMP the
// controller waits in DRAIN for the last pixel to leave the datapath
// (pix_last) and pulses `done`.
//
// Timing without stalls: issue takes cfg_cycles*(k + cfg_npix) + cfg_npix
// clocks, then the datapath latency. A clock without s_valid in LOAD stalls
// the frame by one clock. cfg_npix must be at least 4 so that the final
// read-out never overtakes the mapping pipeline. The phase order follows the
// source; the handshake, the run-time sizes and sharing the read-out with the
// next mapping pass are this design's choices (the source's frame times,
// about one clock per pixel and imaging cycle, suggest a similar overlap).
module das_controller
  import pat_pkg::*;
#(
  parameter int unsigned K    = 2048,
  parameter int unsigned NPIX = 65536,
  parameter int unsigned SETS = 16,
  localparam int unsigned TAU_W = $clog2(K),
  localparam int unsigned PIX_W = $clog2(NPIX),
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned CYC_W = $clog2(SETS + 1),
  localparam int unsigned NP_W  = $clog2(NPIX + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  mode_e            cfg_mode,
  input  logic [CYC_W-1:0] cfg_cycles,
  input  logic [NP_W-1:0]  cfg_npix,
  // sensor handshake
  input  logic             s_valid,
  output logic             s_ready,
  output logic             s_we,
  output logic [TAU_W-1:0] s_addr,
  // mapping pass
  output logic             map_en,
  output logic [SET_W-1:0] map_set,
  output logic [PIX_W-1:0] map_pix,
  // read-out pass
  output logic             rd_en,
  output logic [PIX_W-1:0] rd_pix,
  output logic             rd_first,
  output logic             rd_last,
  // frame
  input  logic             pix_last,
  output mode_e            mode,
  output logic [NP_W-1:0]  npix,
  output logic             busy,
  output logic             done
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_MAP, S_DUMP, S_DRAIN} state_e;

  state_e           state;
  logic [CYC_W-1:0] ncyc, cyc;
  logic [TAU_W-1:0] scnt;
  logic [PIX_W-1:0] pcnt;
  logic             pend;
  logic [CYC_W-1:0] dcyc;               // imaging cycle being read out

  assign pend     = (pcnt == PIX_W'(npix - 1'b1));
  assign s_ready  = (state == S_LOAD);
  assign s_we     = s_ready && s_valid;
  assign s_addr   = scnt;
  assign map_en   = (state == S_MAP);
  assign map_set  = SET_W'(cyc);
  assign map_pix  = pcnt;
  assign rd_en    = (state == S_DUMP) || (state == S_MAP && cyc != '0);
  assign rd_pix   = pcnt;
  assign dcyc     = (state == S_DUMP) ? cyc : cyc - 1'b1;
  assign rd_first = (dcyc == '0);
  assign rd_last  = (dcyc == ncyc - 1'b1);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      mode  <= MODE_DAS;
      ncyc  <= CYC_W'(1);
      npix  <= NP_W'(NPIX);
      cyc   <= '0;
      scnt  <= '0;
      pcnt  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mode  <= cfg_mode;
          ncyc  <= cfg_cycles;
          npix  <= cfg_npix;
          cyc   <= '0;
          scnt  <= '0;
          pcnt  <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (s_valid) begin
          scnt <= scnt + 1'b1;
          if (scnt == TAU_W'(K - 1)) state <= S_MAP;
        end
        S_MAP: begin
          pcnt <= pend ? '0 : pcnt + 1'b1;
          if (pend) begin
            scnt <= '0;
            if (cyc == ncyc - 1'b1) state <= S_DUMP;
            else begin
              cyc   <= cyc + 1'b1;
              state <= S_LOAD;
            end
          end
        end
        S_DUMP: begin
          pcnt <= pend ? '0 : pcnt + 1'b1;
          if (pend) state <= S_DRAIN;
        end
        S_DRAIN: if (pix_last) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cfg_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (cfg_cycles >= 1 && cfg_cycles <= CYC_W'(SETS)
                                    && cfg_npix >= 4 && cfg_npix <= NP_W'(NPIX)))
    else $error("frame configuration out of range");
endmodule

// fta: the frequency-time array, a circular buffer holding the latest
// DEPTH spectra of every frequency channel for the B beams of one
// de-disperser FPGA.
//
// One word holds the samples of all B beams for one (channel, time), so a
// single read serves every beam's de-disperser. The word for channel c and
// absolute spectrum time t sits at address c*DEPTH + (t mod DEPTH):
// channels are stored one after another and the time axis of each channel
// is contiguous, which is the order in which the de-disperser reads it.
// New spectra overwrite the oldest ones.
//
// Interface: one write port (the corner-turner) and one read port (the
// de-dispersion fetcher) with one cycle of read latency.
//
// The paper keeps the FTA in the DDR3 SDRAM of the FPGA module (85.5 MB
// at the ASKAP size) and stresses burst access; here it is an array with
// one write and one read port per cycle, so SDRAM timing, refresh and
// the sharing of one SDRAM port between writes and reads are not modelled.
module fta
  import tardis_pkg::*;
#(
  parameter int unsigned B     = 9,
  parameter int unsigned C     = 304,
  parameter int unsigned DEPTH = 16384
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [CHAN_IW-1:0]        wr_chan,
  input  logic [$clog2(DEPTH)-1:0]  wr_time,
  input  logic [B*SAMPLE_W-1:0]     wr_data,
  input  logic                      rd_en,
  input  logic [CHAN_IW-1:0]        rd_chan,
  input  logic [$clog2(DEPTH)-1:0]  rd_time,
  output logic [B*SAMPLE_W-1:0]     rd_data
);
  localparam int unsigned NW = C * DEPTH;
  localparam int unsigned AW = $clog2(NW);

  logic [B*SAMPLE_W-1:0] mem [NW];

  always_ff @(posedge clk) begin
    if (wr_en) mem[AW'(wr_chan) * AW'(DEPTH) + AW'(wr_time)] <= wr_data;
    if (rd_en) rd_data <= mem[AW'(rd_chan) * AW'(DEPTH) + AW'(rd_time)];
  end
endmodule

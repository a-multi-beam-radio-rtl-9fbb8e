// antenna_summer: the combining stage of Tardis-ASKAP (the "summing FPGA").
//
// Power spectra arrive per antenna and polarization. Coincident beams of
// all NANT antennas and both polarizations are added into one combined
// beam. The sums keep full bit growth (16 + log2(NANT*NPOL) bits) in an
// accumulator RAM of NBEAM x C words. Only when the last antenna and
// polarization of an integration is added is the sum scaled back to 16
// bits: shifted right by `scale_shift` and saturated at 65535.
//
// Interface: one sample per cycle on a valid/ready stream carrying the
// antenna, polarization, beam and channel of each sample. The design
// expects, within one integration, all samples of (antenna 0, pol 0),
// then (0,1), (1,0), ... (NANT-1, NPOL-1); inside a frame any beam/channel
// order is accepted, and the combined samples leave in the order of the
// last frame. The output is a spec_sample_t stream whose `last` flags the
// sample (beam NBEAM-1, channel C-1). Latency one cycle, one sample per
// cycle when the output is not stalled.
//
// From the paper: summing across antennas and polarizations, bit growth,
// scaling back to 16 bits. This design's own choices: the frame order,
// the programmable right shift and the saturation on overflow (the same
// rule the paper gives for the beamformer's 16-bit spectra).
module antenna_summer
  import tardis_pkg::*;
#(
  parameter int unsigned NANT  = 36,
  parameter int unsigned NPOL  = 2,
  parameter int unsigned NBEAM = 36,
  parameter int unsigned C     = 304
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [4:0]                scale_shift,
  // per-antenna spectra
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [SAMPLE_W-1:0]       in_data,
  input  logic [$clog2(NANT+1)-1:0] in_ant,
  input  logic                      in_pol,
  input  logic [BEAM_IW-1:0]        in_beam,
  input  logic [CHAN_IW-1:0]        in_chan,
  // combined spectra
  output logic                      out_valid,
  input  logic                      out_ready,
  output spec_sample_t              out_sample
);
  localparam int unsigned SUM_W = SAMPLE_W + $clog2(NANT*NPOL);
  localparam int unsigned NW    = NBEAM * C;

  logic [SUM_W-1:0] acc_ram [NW];

  logic                  take;
  logic                  first_frame, last_frame;
  logic [$clog2(NW)-1:0] idx;
  logic [SUM_W-1:0]      sum;
  logic [SUM_W-1:0]      scaled;

  assign in_ready    = out_ready || !out_valid;
  assign take        = in_valid && in_ready;
  assign first_frame = (in_ant == '0) && (in_pol == 1'b0);
  assign last_frame  = (in_ant == ($clog2(NANT+1))'(NANT-1)) && (in_pol == 1'(NPOL-1));
  assign idx         = ($clog2(NW))'(in_beam * C + in_chan);
  assign sum         = (first_frame ? '0 : acc_ram[idx]) + SUM_W'(in_data);
  assign scaled      = sum >> scale_shift;

  always_ff @(posedge clk) begin
    if (take && !last_frame) acc_ram[idx] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_sample <= '0;
    end else if (in_ready) begin
      out_valid <= take && last_frame;
      if (take && last_frame) begin
        out_sample.data <= (|scaled[SUM_W-1:SAMPLE_W]) ? '1 : scaled[SAMPLE_W-1:0];
        out_sample.beam <= in_beam;
        out_sample.chan <= in_chan;
        out_sample.last <= (in_beam == BEAM_IW'(NBEAM-1)) && (in_chan == CHAN_IW'(C-1));
      end
    end
  end
endmodule

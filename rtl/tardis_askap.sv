// tardis_askap: the FPGA part of the Tardis-ASKAP transient detector.
//
// A summing stage adds the power spectra of NANT antennas and two
// polarizations into NBEAM combined beams (16 bit). The combined stream
// then passes along a daisy chain of NDD de-disperser-and-detector (DD)
// FPGAs; DD FPGA i captures beams i*B .. i*B+B-1 (B = NBEAM/NDD), and
// de-disperses each for up to D trial dispersion measures over C
// channels, then searches every de-dispersed series for pulses at
// log2(J)+1 boxcar widths.
//
// Ports: the per-antenna spectra stream (valid/ready; in_ready low is
// the flow control back to the host), the combining shift, the
// software settings (broadcast to every DD FPGA: each holds its own copy
// of the SST), and, per DD FPGA and beam, the detection-flag vectors, the
// de-dispersed time series and a statistics monitor port. The host,
// network cards, PCIe fabric and SDRAM chips of the real system are
// outside this module.
//
// Defaults are the Tardis-ASKAP sizes: 36 antennas, 36 beams, 304
// channels, 448 trials, 4 DD FPGAs of 9 beams, J = 16, FTA of 2^14
// spectra per channel.
//
// Lint notes: each DD FPGA's batches_written and channels_done status
// counters are left unconnected here (they are for monitoring and are
// checked inside the DD FPGA tests). The reset is also sampled
// synchronously by the engines' handshake assertion (disable iff), which
// lint reports as a net used both ways; that use is verification only.
module tardis_askap
  import tardis_pkg::*;
#(
  parameter int unsigned NANT  = 36,
  parameter int unsigned NBEAM = 36,
  parameter int unsigned NDD   = 4,
  parameter int unsigned C     = 304,
  parameter int unsigned D     = 448,
  parameter int unsigned J     = 16,
  parameter int unsigned DEPTH = 16384,
  localparam int unsigned B    = NBEAM / NDD
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // per-antenna spectra from the host
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [SAMPLE_W-1:0]          in_data,
  input  logic [$clog2(NANT+1)-1:0]    in_ant,
  input  logic                         in_pol,
  input  logic [BEAM_IW-1:0]           in_beam,
  input  logic [CHAN_IW-1:0]           in_chan,
  input  logic [4:0]                   scale_shift,
  // software configuration (all DD FPGAs)
  input  logic [$clog2(D+1)-1:0]       n_trials,
  input  logic [3:0]                   log2m,
  input  logic [3:0]                   log2s,
  input  logic [5:0]                   xi,
  input  logic                         sw_trial_we,
  input  logic [$clog2(D)-1:0]         sw_trial,
  input  logic [CHAN_IW-1:0]           sw_chan,
  input  sst_entry_t                   sw_entry,
  input  logic                         sw_slot_we,
  input  logic [$clog2(C)-1:0]         sw_slot,
  input  chan_entry_t                  sw_slot_entry,
  // results per DD FPGA and beam
  output logic [B-1:0]                 flags_valid [NDD],
  output logic [D-1:0]                 flags       [NDD][B],
  output logic [B-1:0]                 ts_valid    [NDD],
  output logic [$clog2(D)-1:0]         ts_trial    [NDD][B],
  output logic [$clog2(J)-1:0]         ts_index    [NDD][B],
  output logic [ACC_W-1:0]             ts_data     [NDD][B],
  input  logic [$clog2(D)-1:0]         mon_trial,
  input  logic [$clog2($clog2(J)+1)-1:0] mon_level,
  output logic signed [ACC_W+8:0]      mon_mean    [NDD][B],
  output logic [63:0]                  mon_var     [NDD][B],
  output logic [31:0]                  groups_done [NDD]
);
  logic         ch_valid [NDD+1];
  logic         ch_ready [NDD+1];
  spec_sample_t ch_sample [NDD+1];

  antenna_summer #(.NANT(NANT), .NPOL(2), .NBEAM(NBEAM), .C(C)) u_sum (
    .clk, .rst_n, .scale_shift,
    .in_valid, .in_ready, .in_data, .in_ant, .in_pol, .in_beam, .in_chan,
    .out_valid(ch_valid[0]), .out_ready(ch_ready[0]), .out_sample(ch_sample[0])
  );

  for (genvar i = 0; i < NDD; i++) begin : g_dd
    logic [31:0] batches_written, channels_done;
    dd_fpga #(.B(B), .C(C), .D(D), .J(J), .DEPTH(DEPTH)) u_dd (
      .clk, .rst_n, .beam_base(BEAM_IW'(i * B)),
      .in_valid(ch_valid[i]), .in_ready(ch_ready[i]), .in_sample(ch_sample[i]),
      .dn_valid(ch_valid[i+1]), .dn_ready(ch_ready[i+1]), .dn_sample(ch_sample[i+1]),
      .n_trials, .log2m, .log2s, .xi,
      .sw_trial_we, .sw_trial, .sw_chan, .sw_entry,
      .sw_slot_we, .sw_slot, .sw_slot_entry,
      .flags_valid(flags_valid[i]), .flags(flags[i]),
      .ts_valid(ts_valid[i]), .ts_trial(ts_trial[i]), .ts_index(ts_index[i]), .ts_data(ts_data[i]),
      .mon_trial, .mon_level, .mon_mean(mon_mean[i]), .mon_var(mon_var[i]),
      .batches_written, .groups_done(groups_done[i]), .channels_done
    );
  end

  // the end of the daisy chain is always ready
  assign ch_ready[NDD] = 1'b1;

  initial begin
    assert (NBEAM % NDD == 0) else $error("NBEAM must be a multiple of NDD");
  end
endmodule

// dd_fpga: one De-disperser-and-Detector (DD) FPGA of Tardis.
//
// The spectra stream from the summing FPGA enters the corner-turner,
// which forwards it to the next DD FPGA and stores this FPGA's B beams in
// the frequency-time array (FTA). A single controller sequences B
// identical de-dispersers, one per beam, each made of a de-dispersion
// buffer, a de-dispersion engine and an accumulator memory, against the
// trial profiles in the sample selection table (SST). Each beam's
// transient detector searches the finished de-dispersed time series and
// reports one detection flag per trial per group of J spectra.
//
// Software-facing interface: SST programming ports (trial offsets and the
// channel table), the number of active trials N_T, the detector settings
// (log2 M, log2 S, xi), per-beam detection-flag vectors with a valid
// strobe, per-beam de-dispersed time-series streams and statistics
// monitor ports. Beam b of this FPGA is stream beam beam_base + b.
//
// Pipeline: corner-turn of group g+1, de-dispersion of group g and
// detection of group g-1 overlap, so a pulse is reported about 3J
// integrations after its last sample arrives (when each stage keeps up).
//
// Follows Fig. 4 of the description. The FTA and SST are on-chip arrays
// here where the original uses the module's SDRAM. The corner-turner
// batch K must equal the group size J, as in the original.
//
// Lint notes: the B engines run in lock step, so the controller watches
// only beam 0's busy flag and the other busy bits are unused; the
// controller's `active` status output is not needed at this level. The
// reset is also used by the engines' assertion (disable iff), which lint
// reports as a synchronous use; it adds no logic.
module dd_fpga
  import tardis_pkg::*;
#(
  parameter int unsigned B     = 9,
  parameter int unsigned C     = 304,
  parameter int unsigned D     = 448,
  parameter int unsigned J     = 16,
  parameter int unsigned DEPTH = 16384
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [BEAM_IW-1:0]           beam_base,
  // spectra in / forwarded
  input  logic                         in_valid,
  output logic                         in_ready,
  input  spec_sample_t                 in_sample,
  output logic                         dn_valid,
  input  logic                         dn_ready,
  output spec_sample_t                 dn_sample,
  // software configuration
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
  // results to software, per beam
  output logic [B-1:0]                 flags_valid,
  output logic [D-1:0]                 flags [B],
  output logic [B-1:0]                 ts_valid,
  output logic [$clog2(D)-1:0]         ts_trial [B],
  output logic [$clog2(J)-1:0]         ts_index [B],
  output logic [ACC_W-1:0]             ts_data [B],
  input  logic [$clog2(D)-1:0]         mon_trial,
  input  logic [$clog2($clog2(J)+1)-1:0] mon_level,
  output logic signed [ACC_W+8:0]      mon_mean [B],
  output logic [63:0]                  mon_var [B],
  // status
  output logic [31:0]                  batches_written,
  output logic [31:0]                  groups_done,
  output logic [31:0]                  channels_done
);
  localparam int unsigned TW  = $clog2(DEPTH);
  localparam int unsigned TRW = $clog2(D);

  // corner-turner -> FTA
  logic                  fta_wr_en;
  logic [CHAN_IW-1:0]    fta_wr_chan;
  logic [TW-1:0]         fta_wr_time;
  logic [B*SAMPLE_W-1:0] fta_wr_data;
  // controller
  logic                  fta_rd_en;
  logic [CHAN_IW-1:0]    fta_rd_chan;
  logic [TW-1:0]         fta_rd_time;
  logic [B*SAMPLE_W-1:0] fta_rd_data;
  logic [TRW-1:0]        sst_trial;
  logic [CHAN_IW-1:0]    sst_chan;
  sst_entry_t            sst_rd;
  logic [$clog2(C)-1:0]  slot_f, slot_p;
  chan_entry_t           slot_f_entry, slot_p_entry;
  logic                  buf_wr_en, buf_wr_region, buf_wr_zero;
  logic [TW-1:0]         buf_wr_time;
  logic                  buf_rd_en, buf_rd_region;
  logic [TW-1:0]         buf_rd_base;
  logic                  eng_ce, eng_valid, eng_init, eng_zero, eng_lat_sel;
  logic [TRW-1:0]        eng_trial;
  logic                  acc_cur;
  logic                  td_start, td_region, td_stats_init;
  logic [B-1:0]          eng_busy, td_busy;
  logic                  active;

  corner_turner #(.B(B), .K(J), .C(C), .DEPTH(DEPTH)) u_ct (
    .clk, .rst_n, .beam_base,
    .in_valid, .in_ready, .in_sample,
    .dn_valid, .dn_ready, .dn_sample,
    .fta_wr_en, .fta_wr_chan, .fta_wr_time, .fta_wr_data,
    .groups_done, .batches_written
  );

  fta #(.B(B), .C(C), .DEPTH(DEPTH)) u_fta (
    .clk,
    .wr_en(fta_wr_en), .wr_chan(fta_wr_chan), .wr_time(fta_wr_time), .wr_data(fta_wr_data),
    .rd_en(fta_rd_en), .rd_chan(fta_rd_chan), .rd_time(fta_rd_time), .rd_data(fta_rd_data)
  );

  sst #(.D(D), .C(C)) u_sst (
    .clk,
    .sw_trial_we, .sw_trial, .sw_chan, .sw_entry,
    .sw_slot_we, .sw_slot, .sw_slot_entry,
    .rd_trial(sst_trial), .rd_chan(sst_chan), .rd_entry(sst_rd),
    .rd_slot_a(slot_f), .rd_slot_entry_a(slot_f_entry),
    .rd_slot_b(slot_p), .rd_slot_entry_b(slot_p_entry)
  );

  dd_controller #(.J(J), .D(D), .C(C), .DEPTH(DEPTH)) u_ctl (
    .clk, .rst_n, .n_trials, .batches_written, .groups_done,
    .sst_trial, .sst_chan, .sst_entry(sst_rd),
    .slot_f, .slot_f_entry, .slot_p, .slot_p_entry,
    .fta_rd_en, .fta_rd_chan, .fta_rd_time,
    .buf_wr_en, .buf_wr_region, .buf_wr_time, .buf_wr_zero,
    .buf_rd_en, .buf_rd_region, .buf_rd_base,
    .eng_ce, .eng_valid, .eng_init, .eng_zero, .eng_trial, .eng_lat_sel,
    .eng_busy(eng_busy[0]), .acc_cur,
    .td_busy(|td_busy), .td_start, .td_region, .td_stats_init,
    .active, .channels_done
  );

  for (genvar b = 0; b < B; b++) begin : g_beam
    logic [SAMPLE_W-1:0] rd_data  [J];
    logic [SAMPLE_W-1:0] lat_hold [J];
    logic [TRW-1:0]      acc_rd_trial, acc_wr_trial, td_trial;
    logic                acc_rd_prev, acc_wr_en;
    logic [ACC_W-1:0]    acc_rd_data [J];
    logic [ACC_W-1:0]    acc_wr_data [J];
    logic [$clog2(J)-1:0] td_lane;
    logic [ACC_W-1:0]    td_data;

    dd_buffer #(.J(J), .DEPTH(DEPTH)) u_buf (
      .clk,
      .wr_en(buf_wr_en), .wr_region(buf_wr_region), .wr_time(buf_wr_time),
      .wr_data(buf_wr_zero ? '0 : fta_rd_data[b*SAMPLE_W +: SAMPLE_W]),
      .rd_en(buf_rd_en), .rd_region(buf_rd_region), .rd_base(buf_rd_base),
      .rd_data
    );

    // the J latest samples come back first and wait here for the earliest
    always_ff @(posedge clk) begin
      if (eng_lat_sel) lat_hold <= rd_data;
    end

    dd_engine #(.J(J), .D(D)) u_eng (
      .clk, .rst_n, .ce(eng_ce),
      .in_valid(eng_valid), .in_init(eng_init), .in_zero(eng_zero), .in_trial(eng_trial),
      .in_lat(lat_hold), .in_ear(rd_data),
      .acc_rd_trial, .acc_rd_prev, .acc_rd_data,
      .acc_wr_en, .acc_wr_trial, .acc_wr_data,
      .busy(eng_busy[b])
    );

    acc_memory #(.J(J), .D(D)) u_acc (
      .clk,
      .eng_rd_region(acc_rd_prev ? ~acc_cur : acc_cur), .eng_rd_trial(acc_rd_trial),
      .eng_rd_data(acc_rd_data),
      .eng_wr_en(acc_wr_en), .eng_wr_region(acc_cur), .eng_wr_trial(acc_wr_trial),
      .eng_wr_data(acc_wr_data),
      .td_region, .td_trial, .td_lane, .td_data
    );

    transient_detector #(.J(J), .D(D), .F(8)) u_td (
      .clk, .rst_n,
      .start(td_start), .stats_init(td_stats_init), .n_trials, .log2m, .log2s, .xi,
      .busy(td_busy[b]),
      .acc_trial(td_trial), .acc_lane(td_lane), .acc_data(td_data),
      .ts_valid(ts_valid[b]), .ts_trial(ts_trial[b]), .ts_index(ts_index[b]), .ts_data(ts_data[b]),
      .flags_valid(flags_valid[b]), .flags(flags[b]),
      .mon_trial, .mon_level, .mon_mean(mon_mean[b]), .mon_var(mon_var[b])
    );
  end
endmodule

// tb_dd_fpga: end-to-end test of one de-disperser-and-detector FPGA at
// reduced size (B=2 beams of a 3-beam stream, C=8 channels, D=6 trials,
// J=4, FTA depth 64).
//
// Random spectra are streamed in spectrum by spectrum. The testbench keeps
// its own copy of every spectrum and computes each de-dispersed sample
// directly from the definition
//   A[d,m] = sum over enabled channels c of sum_{t=m-eoff..m-loff} S[c,t]
// (S = 0 before the first spectrum), and compares it with the time series
// the transient detectors stream out. The SST has random offsets, the
// channel table visits the channels in an interleaved order and disables
// one. A strong dispersed pulse is added along one trial's profile in
// beam 0 and must raise that trial's flag in the right group. The run
// covers more spectra than the FTA holds (wrap-around) and feeds spectra
// faster than they are processed, so the input flow control must act.
// Checked also: the third beam is forwarded downstream unchanged.
module tb_dd_fpga;
  import tardis_pkg::*;

  localparam int unsigned B = 2, C = 8, D = 6, J = 4, DEPTH = 64;
  localparam int unsigned NBS = 3;            // beams in the stream
  localparam int unsigned NG  = 24;           // groups to stream
  localparam int unsigned NT  = NG * J;       // spectra
  localparam int unsigned PULSE_TRIAL = 3;
  localparam int unsigned PULSE_M     = 18 * J + 2;
  localparam int unsigned DISABLED    = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                in_valid, in_ready, dn_valid, dn_ready;
  spec_sample_t        in_sample, dn_sample;
  logic [$clog2(D+1)-1:0] n_trials;
  logic [3:0]          log2m, log2s;
  logic [5:0]          xi;
  logic                sw_trial_we, sw_slot_we;
  logic [$clog2(D)-1:0] sw_trial;
  logic [CHAN_IW-1:0]  sw_chan;
  sst_entry_t          sw_entry;
  logic [$clog2(C)-1:0] sw_slot;
  chan_entry_t         sw_slot_entry;
  logic [B-1:0]        flags_valid, ts_valid;
  logic [D-1:0]        flags [B];
  logic [$clog2(D)-1:0] ts_trial [B];
  logic [$clog2(J)-1:0] ts_index [B];
  logic [ACC_W-1:0]    ts_data [B];
  logic [$clog2(D)-1:0] mon_trial;
  logic [$clog2($clog2(J)+1)-1:0] mon_level;
  logic signed [ACC_W+8:0] mon_mean [B];
  logic [63:0]         mon_var [B];
  logic [31:0]         batches_written, groups_done, channels_done;

  dd_fpga #(.B(B), .C(C), .D(D), .J(J), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .beam_base(BEAM_IW'(0)),
    .in_valid, .in_ready, .in_sample, .dn_valid, .dn_ready, .dn_sample,
    .n_trials, .log2m, .log2s, .xi,
    .sw_trial_we, .sw_trial, .sw_chan, .sw_entry, .sw_slot_we, .sw_slot, .sw_slot_entry,
    .flags_valid, .flags, .ts_valid, .ts_trial, .ts_index, .ts_data,
    .mon_trial, .mon_level, .mon_mean, .mon_var,
    .batches_written, .groups_done, .channels_done
  );

  int checks = 0, failures = 0;
  int unsigned spec [NBS][C][NT];
  int unsigned eoff [D][C], loff [D][C];
  int          order [C];
  int          groups_seen [B];
  int          stalls = 0, wraps = 0, detections = 0, fwd_ok = 0, skipped = 0;

  function automatic int unsigned ref_a(int b, int d, int m);
    int unsigned s = 0;
    for (int c = 0; c < C; c++) begin
      if (c == DISABLED) continue;
      for (int t = m - int'(eoff[d][c]); t <= m - int'(loff[d][c]); t++)
        if (t >= 0) s += spec[b][c][t];
    end
    return s;
  endfunction

  task automatic fail(string what);
    failures++;
    $display("FAIL %s", what);
  endtask

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare the streamed time series and flags with the reference
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < B; b++) begin
      if (ts_valid[b]) begin
        int m;
        int unsigned r;
        m = groups_seen[b] * J + int'(ts_index[b]);
        r = ref_a(b, int'(ts_trial[b]), m);
        checks++;
        if (ts_data[b] !== r) begin
          failures++;
          $display("FAIL beam %0d trial %0d m %0d: got %0d expected %0d", b, ts_trial[b], m, ts_data[b], r);
        end
      end
      if (flags_valid[b]) begin
        if (b == 0 && groups_seen[b] == PULSE_M / J) begin
          checks++;
          if (!flags[b][PULSE_TRIAL]) fail("pulse not detected");
          else detections++;
        end
        groups_seen[b]++;
      end
    end
    if (in_valid && !in_ready) stalls++;
    if (dut.fta_wr_en && dut.fta_wr_time == '0 && dut.batches_written > 0) wraps++;
    if (int'(dut.u_ctl.pst) == 2 && !dut.slot_p_entry.en) skipped++;
  end

  // forwarded stream: the beam outside this FPGA's range comes out unchanged
  int unsigned fwd_t = 0, fwd_idx = 0;
  always @(posedge clk) if (rst_n && dn_valid && dn_ready) begin
    int exp_b, exp_c;
    exp_b = int'(fwd_idx) / C;
    exp_c = int'(fwd_idx) % C;
    if (dn_sample.beam != BEAM_IW'(exp_b) || dn_sample.chan != CHAN_IW'(exp_c) ||
        dn_sample.data != SAMPLE_W'(spec[exp_b][exp_c][fwd_t])) begin
      failures++;
      $display("FAIL forwarded sample t=%0d idx=%0d", fwd_t, fwd_idx);
    end else fwd_ok++;
    fwd_idx++;
    if (fwd_idx == NBS * C) begin fwd_idx = 0; fwd_t++; end
  end

  initial begin
    in_valid = 0; in_sample = '0; dn_ready = 1;
    n_trials = D; log2m = 2; log2s = 8; xi = 6;
    sw_trial_we = 0; sw_slot_we = 0; sw_trial = '0; sw_chan = '0; sw_entry = '0;
    sw_slot = '0; sw_slot_entry = '0; mon_trial = '0; mon_level = '0;
    for (int b = 0; b < B; b++) groups_seen[b] = 0;
    // spectra: noise 100..163
    for (int b = 0; b < NBS; b++)
      for (int c = 0; c < C; c++)
        for (int t = 0; t < NT; t++) spec[b][c][t] = 100 + ($urandom % 64);
    // trial profiles: offsets grow with trial and fall with channel
    for (int d = 0; d < D; d++)
      for (int c = 0; c < C; c++) begin
        loff[d][c] = (d * (C - 1 - c) * 5) / C + ($urandom % 2);
        eoff[d][c] = loff[d][c] + d / 2 + ($urandom % 3);
        if (eoff[d][c] > DEPTH - 2*J - 1) eoff[d][c] = DEPTH - 2*J - 1;
      end
    // dispersed pulse along trial PULSE_TRIAL, beam 0
    for (int c = 0; c < C; c++)
      for (int t = PULSE_M - int'(eoff[PULSE_TRIAL][c]); t <= PULSE_M - int'(loff[PULSE_TRIAL][c]); t++)
        spec[0][c][t] += 3000;
    // interleaved channel order: 0, 7, 1, 6, 2, 5, 3, 4
    for (int s = 0; s < C; s++) order[s] = (s % 2 == 0) ? s / 2 : C - 1 - s / 2;

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // program the SST and the channel table
    for (int d = 0; d < D; d++)
      for (int c = 0; c < C; c++) begin
        sw_trial_we <= 1; sw_trial <= d; sw_chan <= c;
        sw_entry <= '{eoff: LAG_W'(eoff[d][c]), loff: LAG_W'(loff[d][c])};
        @(posedge clk);
      end
    sw_trial_we <= 0;
    for (int s = 0; s < C; s++) begin
      int unsigned emax, lmin;
      emax = 0; lmin = 1 << 30;
      for (int d = 0; d < D; d++) begin
        if (eoff[d][order[s]] > emax) emax = eoff[d][order[s]];
        if (loff[d][order[s]] < lmin) lmin = loff[d][order[s]];
      end
      sw_slot_we <= 1; sw_slot <= s;
      sw_slot_entry <= '{chan: CHAN_IW'(order[s]), en: (order[s] != DISABLED),
                         eoff_max: LAG_W'(emax), loff_min: LAG_W'(lmin)};
      @(posedge clk);
    end
    sw_slot_we <= 0;
    @(posedge clk);

    // stream the spectra
    for (int t = 0; t < NT; t++)
      for (int b = 0; b < NBS; b++)
        for (int c = 0; c < C; c++) begin
          in_valid <= 1;
          in_sample <= '{data: SAMPLE_W'(spec[b][c][t]), beam: BEAM_IW'(b), chan: CHAN_IW'(c),
                         last: (b == NBS - 1 && c == C - 1)};
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
    in_valid <= 0;

    // wait for the detectors to report every group
    while (groups_seen[0] < NG || groups_seen[1] < NG) @(posedge clk);
    repeat (10) @(posedge clk);

    checks++; if (stalls == 0)     fail("input flow control never stalled");
    checks++; if (wraps == 0)      fail("FTA never wrapped");
    checks++; if (detections == 0) fail("no detection");
    checks++; if (skipped == 0)    fail("disabled channel never skipped");
    checks++; if (fwd_ok != NBS * C * NT) fail("forwarded sample count");
    checks++; if (channels_done != (C - 1) * NG) fail("channels processed");
    $display("stalls=%0d wraps=%0d detections=%0d skipped=%0d forwarded=%0d channels=%0d",
             stalls, wraps, detections, skipped, fwd_ok, channels_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tardis_askap: end-to-end test of the whole detector at reduced size
// (2 antennas x 2 polarizations, 4 combined beams, 2 DD FPGAs of 2 beams,
// C=4 channels, D=3 trials, J=4, FTA depth 32).
//
// Random per-antenna spectra are streamed in. The testbench forms the
// combined spectra itself (sum over antennas and polarizations, shift,
// saturate to 16 bits) and from them every de-dispersed sample directly
// from its definition, and compares that with the time series that every
// beam of every DD FPGA streams out. A strong dispersed pulse is put into
// one beam handled by the second DD FPGA; its combined value saturates,
// and it must raise the flag of its trial in its group.
//
// Mechanisms counted, each must occur at least once: input stall (flow
// control from the corner-turners back through the summer), saturation
// in the summer, FTA wrap-around, a disabled channel skipped, a detection,
// accumulator-region swaps (one per group in every DD FPGA), and the
// daisy-chain forwarding (the second FPGA only sees its beams through
// the first).
module tb_tardis_askap;
  import tardis_pkg::*;
  localparam int unsigned NANT = 2, NBEAM = 4, NDD = 2, C = 4, D = 3, J = 4, DEPTH = 32;
  localparam int unsigned B = NBEAM / NDD;
  localparam int unsigned NG = 14, NT = NG * J;
  localparam int unsigned PULSE_BEAM = 3, PULSE_TRIAL = 2, PULSE_M = 10 * J + 1;
  localparam int unsigned DISABLED = 2, SHIFT = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_pol;
  logic [SAMPLE_W-1:0] in_data;
  logic [1:0] in_ant;
  logic [BEAM_IW-1:0] in_beam;
  logic [CHAN_IW-1:0] in_chan;
  logic [4:0] scale_shift;
  logic [$clog2(D+1)-1:0] n_trials;
  logic [3:0] log2m, log2s;
  logic [5:0] xi;
  logic sw_trial_we, sw_slot_we;
  logic [$clog2(D)-1:0] sw_trial;
  logic [CHAN_IW-1:0] sw_chan;
  sst_entry_t sw_entry;
  logic [$clog2(C)-1:0] sw_slot;
  chan_entry_t sw_slot_entry;
  logic [B-1:0] flags_valid [NDD];
  logic [D-1:0] flags [NDD][B];
  logic [B-1:0] ts_valid [NDD];
  logic [$clog2(D)-1:0] ts_trial [NDD][B];
  logic [$clog2(J)-1:0] ts_index [NDD][B];
  logic [ACC_W-1:0] ts_data [NDD][B];
  logic [$clog2(D)-1:0] mon_trial;
  logic [$clog2($clog2(J)+1)-1:0] mon_level;
  logic signed [ACC_W+8:0] mon_mean [NDD][B];
  logic [63:0] mon_var [NDD][B];
  logic [31:0] groups_done [NDD];

  tardis_askap #(.NANT(NANT), .NBEAM(NBEAM), .NDD(NDD), .C(C), .D(D), .J(J), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned raw [NANT][2][NBEAM][C][NT];
  int unsigned comb [NBEAM][C][NT];
  int unsigned eoff [D][C], loff [D][C];
  int order [C];
  int groups_seen [NBEAM];
  int stalls = 0, saturations = 0, wraps = 0, skipped = 0, detections = 0, swaps = 0, chained = 0;
  logic prev_acc [NDD];

  function automatic int unsigned ref_a(int b, int d, int m);
    int unsigned s = 0;
    for (int c = 0; c < C; c++) begin
      if (c == DISABLED) continue;
      for (int t = m - int'(eoff[d][c]); t <= m - int'(loff[d][c]); t++)
        if (t >= 0) s += comb[b][c][t];
    end
    return s;
  endfunction

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NDD; i++) begin
      for (int k = 0; k < B; k++) begin
        int bb;
        bb = i * B + k;
        if (ts_valid[i][k]) begin
          int m;
          int unsigned r;
          m = groups_seen[bb] * J + int'(ts_index[i][k]);
          r = ref_a(bb, int'(ts_trial[i][k]), m);
          checks++;
          if (ts_data[i][k] !== r) begin
            failures++;
            $display("FAIL fpga %0d beam %0d trial %0d m %0d: got %0d expected %0d",
                     i, bb, ts_trial[i][k], m, ts_data[i][k], r);
          end
          if (i > 0) chained++;
        end
        if (flags_valid[i][k]) begin
          if (bb == PULSE_BEAM && groups_seen[bb] == PULSE_M / J) begin
            checks++;
            if (!flags[i][k][PULSE_TRIAL]) begin failures++; $display("FAIL pulse not detected"); end
            else detections++;
          end
          groups_seen[bb]++;
        end
      end
    end
    if (in_valid && !in_ready) stalls++;
    if (dut.g_dd[0].u_dd.fta_wr_en && dut.g_dd[0].u_dd.fta_wr_time == '0 && dut.g_dd[0].batches_written > 0) wraps++;
    if (int'(dut.g_dd[1].u_dd.u_ctl.pst) == 2 && !dut.g_dd[1].u_dd.slot_p_entry.en) skipped++;
    if (dut.g_dd[0].u_dd.acc_cur != prev_acc[0]) swaps++;
    if (dut.g_dd[1].u_dd.acc_cur != prev_acc[1]) swaps++;
    prev_acc[0] <= dut.g_dd[0].u_dd.acc_cur;
    prev_acc[1] <= dut.g_dd[1].u_dd.acc_cur;
  end

  initial begin
    in_valid = 0; in_data = '0; in_ant = '0; in_pol = 0; in_beam = '0; in_chan = '0;
    scale_shift = SHIFT; n_trials = D; log2m = 2; log2s = 8; xi = 6;
    sw_trial_we = 0; sw_slot_we = 0; sw_trial = '0; sw_chan = '0; sw_entry = '0;
    sw_slot = '0; sw_slot_entry = '0; mon_trial = '0; mon_level = '0;
    prev_acc[0] = 0; prev_acc[1] = 0;
    for (int b = 0; b < NBEAM; b++) groups_seen[b] = 0;
    for (int d = 0; d < D; d++)
      for (int c = 0; c < C; c++) begin
        loff[d][c] = (d * (C - 1 - c) * 3) / C + ($urandom % 2);
        eoff[d][c] = loff[d][c] + d + ($urandom % 3);
      end
    for (int a = 0; a < NANT; a++) for (int p = 0; p < 2; p++)
      for (int b = 0; b < NBEAM; b++) for (int c = 0; c < C; c++) for (int t = 0; t < NT; t++)
        raw[a][p][b][c][t] = 100 + ($urandom % 64);
    // dispersed pulse, large enough that its combined value saturates
    for (int a = 0; a < NANT; a++) for (int p = 0; p < 2; p++) for (int c = 0; c < C; c++)
      for (int t = PULSE_M - int'(eoff[PULSE_TRIAL][c]); t <= PULSE_M - int'(loff[PULSE_TRIAL][c]); t++)
        raw[a][p][PULSE_BEAM][c][t] = 50000;
    for (int b = 0; b < NBEAM; b++) for (int c = 0; c < C; c++) for (int t = 0; t < NT; t++) begin
      int unsigned s;
      s = 0;
      for (int a = 0; a < NANT; a++) for (int p = 0; p < 2; p++) s += raw[a][p][b][c][t];
      s = s >> SHIFT;
      if (s > 65535) begin s = 65535; saturations++; end
      comb[b][c][t] = s;
    end
    for (int s = 0; s < C; s++) order[s] = (s % 2 == 0) ? s / 2 : C - 1 - s / 2;

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
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

    for (int t = 0; t < NT; t++)
      for (int a = 0; a < NANT; a++) for (int p = 0; p < 2; p++)
        for (int b = 0; b < NBEAM; b++) for (int c = 0; c < C; c++) begin
          in_valid <= 1;
          in_data <= SAMPLE_W'(raw[a][p][b][c][t]);
          in_ant <= 2'(a); in_pol <= 1'(p); in_beam <= BEAM_IW'(b); in_chan <= CHAN_IW'(c);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
    in_valid <= 0;

    for (int b = 0; b < NBEAM; b++) while (groups_seen[b] < NG) @(posedge clk);
    repeat (10) @(posedge clk);

    checks++; if (stalls == 0)      begin failures++; $display("FAIL no input stall"); end
    checks++; if (saturations == 0) begin failures++; $display("FAIL no saturation"); end
    checks++; if (wraps == 0)       begin failures++; $display("FAIL no FTA wrap"); end
    checks++; if (skipped == 0)     begin failures++; $display("FAIL no skipped channel"); end
    checks++; if (detections == 0)  begin failures++; $display("FAIL no detection"); end
    checks++; if (swaps != NDD * NG) begin failures++; $display("FAIL region swaps %0d", swaps); end
    checks++; if (chained == 0)     begin failures++; $display("FAIL nothing reached the second FPGA"); end
    checks++; if (groups_done[0] != NG || groups_done[1] != NG) begin failures++; $display("FAIL groups"); end
    $display("stalls=%0d saturations=%0d wraps=%0d skipped=%0d detections=%0d swaps=%0d chained=%0d",
             stalls, saturations, wraps, skipped, detections, swaps, chained);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

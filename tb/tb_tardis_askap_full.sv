// tb_tardis_askap_full: one complete operation of the detector at its
// full Tardis-ASKAP size (36 antennas x 2 polarizations, 36 beams, 4 DD
// FPGAs of 9 beams, 304 channels, 448 trials, J = 16, FTA depth 16384).
//
// The SST is loaded with a smooth set of 448 trial profiles, then one
// group of J = 16 integrations of per-antenna spectra is streamed in
// (12.6 million input samples). The spectra come from a hash of
// (antenna, pol, beam, channel, time), so the testbench can recompute any
// combined sample. It then waits until every detector has reported the
// group and checks:
//  * de-dispersed samples of trial 0, a middle and the last trial, for the
//    first beam of every DD FPGA, against a direct sum over the
//    recomputed combined spectra;
//  * the number of time-series words per beam (J x 448);
//  * the transient detector's processing time per group: 448 trials x
//    (45J - 17) = 314,944 clock cycles, as stated for the design;
//  * engine steps at most every second clock, and one step per active
//    trial and channel plus one initialisation step per trial;
//  * the latency from the last sample of the group to the detection
//    flags stays within the stated maximum of 3J integrations (48 ms =
//    11,184,000 cycles of the 233 MHz clock at 1 ms per integration).
module tb_tardis_askap_full;
  import tardis_pkg::*;
  localparam int unsigned NANT = 36, NBEAM = 36, NDD = 4, C = 304, D = 448, J = 16;
  localparam int unsigned B = NBEAM / NDD;
  localparam int unsigned SHIFT = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_pol;
  logic [SAMPLE_W-1:0] in_data;
  logic [5:0] in_ant;
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

  tardis_askap dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;

  function automatic int unsigned raw(int a, int p, int b, int c, int t);
    int unsigned h;
    h = (a * 7919 + p * 104729 + b * 1299709 + c * 15485863 + t * 32452843) * 32'h9E3779B1;
    return 100 + (h >> 26);
  endfunction

  function automatic int unsigned comb(int b, int c, int t);
    int unsigned s;
    s = 0;
    if (t < 0) return 0;
    for (int a = 0; a < NANT; a++) for (int p = 0; p < 2; p++) s += raw(a, p, b, c, t);
    s = s >> SHIFT;
    return (s > 65535) ? 65535 : s;
  endfunction

  function automatic int loff(int d, int c);
    return (d * (C - 1 - c)) / (4 * C);
  endfunction
  function automatic int eoff(int d, int c);
    return loff(d, c) + d / 32;
  endfunction

  function automatic int unsigned ref_a(int b, int d, int m);
    int unsigned s;
    s = 0;
    for (int c = 0; c < C; c++)
      for (int t = m - eoff(d, c); t <= m - loff(d, c); t++) s += comb(b, c, t);
    return s;
  endfunction

  initial begin
    repeat (16_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // time-series capture and check
  int ts_count [NDD];
  int flags_seen = 0;
  longint in_done = -1, flags_at = -1;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int i = 0; i < NDD; i++) begin
      for (int k = 0; k < B; k++) begin
        if (ts_valid[i][k] && k == 0) begin
          int d;
          d = int'(ts_trial[i][k]);
          ts_count[i]++;
          if (d == 0 || d == D / 2 || d == D - 1) begin
            int unsigned r;
            r = ref_a(i * B, d, int'(ts_index[i][k]));
            checks++;
            if (ts_data[i][k] !== r) begin
              failures++;
              $display("FAIL fpga %0d trial %0d m %0d: got %0d expected %0d", i, d, ts_index[i][k], ts_data[i][k], r);
            end
          end
        end
        if (flags_valid[i][k]) begin
          flags_seen++;
          flags_at = cyc;
        end
      end
    end
  end

  // engine step spacing and count, detector busy time (DD FPGA 0, beam 0)
  longint last_step = -10, steps = 0, td_rise = -1, td_cycles = -1;
  logic td_busy_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_dd[0].u_dd.eng_valid) begin
      checks++;
      if (cyc - last_step < 2) begin failures++; $display("FAIL engine steps closer than 2 cycles"); end
      last_step = cyc;
      steps++;
    end
    td_busy_q <= dut.g_dd[0].u_dd.g_beam[0].u_td.busy;
    if (dut.g_dd[0].u_dd.g_beam[0].u_td.busy && !td_busy_q) td_rise = cyc;
    if (!dut.g_dd[0].u_dd.g_beam[0].u_td.busy && td_busy_q && td_cycles < 0) td_cycles = cyc - td_rise;
  end

  initial begin
    in_valid = 0; in_data = '0; in_ant = '0; in_pol = 0; in_beam = '0; in_chan = '0;
    scale_shift = SHIFT; n_trials = D; log2m = 4; log2s = 8; xi = 6;
    sw_trial_we = 0; sw_slot_we = 0; sw_trial = '0; sw_chan = '0; sw_entry = '0;
    sw_slot = '0; sw_slot_entry = '0; mon_trial = '0; mon_level = '0;
    for (int i = 0; i < NDD; i++) ts_count[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int d = 0; d < D; d++)
      for (int c = 0; c < C; c++) begin
        sw_trial_we <= 1; sw_trial <= d; sw_chan <= c;
        sw_entry <= '{eoff: LAG_W'(eoff(d, c)), loff: LAG_W'(loff(d, c))};
        @(posedge clk);
      end
    sw_trial_we <= 0;
    for (int s = 0; s < C; s++) begin
      sw_slot_we <= 1; sw_slot <= s;
      sw_slot_entry <= '{chan: CHAN_IW'(s), en: 1'b1,
                         eoff_max: LAG_W'(eoff(D - 1, s)), loff_min: LAG_W'(0)};
      @(posedge clk);
    end
    sw_slot_we <= 0;
    @(posedge clk);

    for (int t = 0; t < J; t++)
      for (int a = 0; a < NANT; a++) for (int p = 0; p < 2; p++)
        for (int b = 0; b < NBEAM; b++) for (int c = 0; c < C; c++) begin
          in_valid <= 1;
          in_data <= SAMPLE_W'(raw(a, p, b, c, t));
          in_ant <= 6'(a); in_pol <= 1'(p); in_beam <= BEAM_IW'(b); in_chan <= CHAN_IW'(c);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
    in_valid <= 0;
    in_done = cyc;

    while (flags_seen < NBEAM) @(posedge clk);
    repeat (10) @(posedge clk);

    for (int i = 0; i < NDD; i++) begin
      checks++;
      if (ts_count[i] != J * D) begin failures++; $display("FAIL fpga %0d: %0d time-series words", i, ts_count[i]); end
      checks++;
      if (groups_done[i] != 1) begin failures++; $display("FAIL fpga %0d groups_done %0d", i, groups_done[i]); end
    end
    checks++;
    if (td_cycles != D * (45 * J - 17)) begin failures++; $display("FAIL detector took %0d cycles", td_cycles); end
    checks++;
    if (steps != D * (C + 1)) begin failures++; $display("FAIL %0d engine steps", steps); end
    checks++;
    if (flags_at - in_done > 3 * J * 233_000) begin failures++; $display("FAIL latency %0d cycles", flags_at - in_done); end
    $display("detector cycles per group %0d, engine steps %0d, latency %0d cycles, total cycles %0d",
             td_cycles, steps, flags_at - in_done, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

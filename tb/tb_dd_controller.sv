// tb_dd_controller: sequencing of the de-disperser controller at reduced
// size (J=4, D=3 trials, C=4 slots with one disabled, FTA depth 32), with
// behavioural models of the SST, the corner-turner progress and the
// transient detector's busy signal.
//
// Checked per group: the group does not start before its batch is written;
// the number of FTA reads of every channel equals its fetch window
// (eoff_max - loff_min + J + 1) and the read times are consecutive from
// gJ - eoff_max - 1; one init step plus one step per enabled channel for
// every active trial; engine steps only on ce cycles and never two in a
// row; the latest-sample read base of every step is gJ - loff; td_start
// once per group, only while the detector is idle, on the region just
// written, with the regions alternating; stats_init only in the first
// group. The detector is kept busy for a long time in one group to check
// that completion waits for it.
module tb_dd_controller;
  import tardis_pkg::*;
  localparam int unsigned J = 4, D = 3, C = 4, DEPTH = 32, NG = 6;
  localparam int unsigned DIS = 2;           // disabled slot
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [$clog2(D+1)-1:0] n_trials = D;
  logic [31:0] batches_written = 0, groups_done;
  logic [$clog2(D)-1:0] sst_trial;
  logic [CHAN_IW-1:0] sst_chan;
  sst_entry_t sst_entry;
  logic [$clog2(C)-1:0] slot_f, slot_p;
  chan_entry_t slot_f_entry, slot_p_entry;
  logic fta_rd_en, buf_wr_en, buf_wr_region, buf_wr_zero, buf_rd_en, buf_rd_region;
  logic [CHAN_IW-1:0] fta_rd_chan;
  logic [4:0] fta_rd_time, buf_wr_time, buf_rd_base;
  logic eng_ce, eng_valid, eng_init, eng_zero, eng_lat_sel, eng_busy, acc_cur;
  logic [$clog2(D)-1:0] eng_trial;
  logic td_busy = 0, td_start, td_region, td_stats_init, active;
  logic [31:0] channels_done;

  dd_controller #(.J(J), .D(D), .C(C), .DEPTH(DEPTH)) dut (.*);

  int eoff [D][C], loff [D][C], emax [C], lmin [C];
  chan_entry_t slots [C];
  assign sst_entry    = '{eoff: LAG_W'(eoff[sst_trial][sst_chan]), loff: LAG_W'(loff[sst_trial][sst_chan])};
  assign slot_f_entry = slots[slot_f];
  assign slot_p_entry = slots[slot_p];
  // engine pipeline model: busy while a step is in flight (J+2 ce steps)
  int inflight = 0;
  assign eng_busy = inflight != 0;

  int checks = 0, failures = 0;
  int g_obs = 0, fetch_n = 0, fetch_chan = -1, fetch_next = 0, steps = 0, inits = 0;
  int last_valid_cyc = -10, cyc = 0, td_busy_cnt = 0, td_starts = 0, waited = 0;
  logic last_region = 1'b0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (group %0d)", what, g_obs); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (inflight > 0 && eng_ce) inflight--;
    if (eng_valid) begin
      chk(eng_ce, "step outside ce");
      chk(cyc - last_valid_cyc >= 2, "two steps in a row");
      last_valid_cyc = cyc;
      inflight = J + 2;
      chk(eng_zero == (g_obs == 0), "zero flag");
      if (eng_init) inits++; else steps++;
    end
    // latest-sample read on ph 0 during a channel pass
    if (buf_rd_en && !eng_lat_sel && int'(dut.pst) == 3)
      chk(int'(buf_rd_base) == ((g_obs * J - loff[sst_trial][sst_chan]) & (DEPTH - 1)), "latest read base");
    if (fta_rd_en) begin
      if (int'(fta_rd_chan) != fetch_chan || fetch_n == 0) begin
        fetch_chan = fta_rd_chan; fetch_n = 0;
        fetch_next = g_obs * J - emax[fta_rd_chan] - 1;
      end
      chk(int'(fta_rd_time) == (fetch_next & (DEPTH - 1)), "fetch time");
      fetch_next++;
      fetch_n++;
      if (fetch_n == emax[fta_rd_chan] - lmin[fta_rd_chan] + J + 1) fetch_n = 0;
    end
    if (td_start) begin
      chk(!td_busy, "start while busy");
      chk(td_region == ~acc_cur, "detector region");
      chk(td_region != last_region || td_starts == 0, "regions alternate");
      chk(td_stats_init == (g_obs == 0), "stats_init");
      chk(inits == D && steps == D * (C - 1), "steps per group");
      chk(batches_written > g_obs, "group before batch");
      chk(fetch_n == 0, "incomplete fetch");
      last_region = td_region;
      inits = 0; steps = 0; td_starts++;
      g_obs++;
      td_busy_cnt = (g_obs == 2) ? 400 : 20;
    end
    if (td_busy_cnt > 0) td_busy_cnt--;
    td_busy <= td_busy_cnt > 0;
    if (td_busy && int'(dut.pst) == 5) waited++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < C; c++) begin
      emax[c] = 0; lmin[c] = 1000;
      for (int d = 0; d < D; d++) begin
        loff[d][c] = d * (C - c) + $urandom % 2;
        eoff[d][c] = loff[d][c] + d + $urandom % 3;
        if (eoff[d][c] > emax[c]) emax[c] = eoff[d][c];
        if (loff[d][c] < lmin[c]) lmin[c] = loff[d][c];
      end
    end
    for (int s = 0; s < C; s++)
      slots[s] = '{chan: CHAN_IW'(C - 1 - s), en: (s != DIS), eoff_max: LAG_W'(emax[C-1-s]), loff_min: LAG_W'(lmin[C-1-s])};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (50) @(posedge clk);
    checks++;
    if (active || groups_done != 0) begin failures++; $display("FAIL started without a batch"); end
    // release batches slowly, one after the other
    for (int b = 0; b < NG; b++) begin
      batches_written <= b + 1;
      while (groups_done < b + 1) @(posedge clk);
      repeat ($urandom % 20) @(posedge clk);
    end
    repeat (500) @(posedge clk);
    chk(td_starts == NG && groups_done == NG, "group count");
    chk(channels_done == NG * (C - 1), "channel count");
    chk(waited > 100, "completion waited for the detector");
    $display("cycles waiting for the detector: %0d", waited);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

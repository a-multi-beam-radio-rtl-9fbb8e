// tb_corner_turner: corner-turner at reduced size (B=2 of a 4-beam stream
// starting at beam 1, K=4, C=3, DEPTH=16). Streams 10 batches of random
// spectra. Checks: every FTA write (channel, time mod DEPTH, both beams)
// against the spectra, written channel by channel with K consecutive
// times per channel; the forwarded stream is the input unchanged; with
// groups_done held at 0 only batches 0 and 1 are written and the input
// stalls once both halves of the batch buffer are full; releasing
// groups_done lets the rest through.
module tb_corner_turner;
  import tardis_pkg::*;
  localparam int unsigned B = 2, K = 4, C = 3, DEPTH = 16, NBS = 4, NBATCH = 10;
  localparam int unsigned BASE = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, dn_valid, dn_ready = 1, fta_wr_en;
  spec_sample_t in_sample = '0, dn_sample;
  logic [CHAN_IW-1:0] fta_wr_chan;
  logic [3:0] fta_wr_time;
  logic [B*SAMPLE_W-1:0] fta_wr_data;
  logic [31:0] groups_done = 0, batches_written;
  corner_turner #(.B(B), .K(K), .C(C), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .beam_base(BEAM_IW'(BASE)), .in_valid, .in_ready, .in_sample,
    .dn_valid, .dn_ready, .dn_sample, .fta_wr_en, .fta_wr_chan, .fta_wr_time, .fta_wr_data,
    .groups_done, .batches_written);

  int checks = 0, failures = 0, nwr = 0, stalls = 0, nfwd = 0;
  logic [SAMPLE_W-1:0] spec [NBS][C][NBATCH*K];

  always @(posedge clk) if (rst_n) begin
    if (fta_wr_en) begin
      int bt, c, k, t;
      bt = nwr / (C * K); c = (nwr / K) % C; k = nwr % K; t = bt * K + k;
      checks++;
      if (fta_wr_chan != CHAN_IW'(c) || fta_wr_time != 4'(t) ||
          fta_wr_data != {spec[BASE+1][c][t], spec[BASE][c][t]}) begin
        failures++;
        $display("FAIL write %0d: chan %0d time %0d", nwr, fta_wr_chan, fta_wr_time);
      end
      nwr++;
    end
    if (dn_valid && dn_ready) begin
      int t, b, c;
      t = nfwd / (NBS * C); b = (nfwd / C) % NBS; c = nfwd % C;
      checks++;
      if (dn_sample.data != spec[b][c][t] || dn_sample.beam != BEAM_IW'(b)) begin
        failures++; $display("FAIL forward %0d", nfwd);
      end
      nfwd++;
    end
    if (in_valid && !in_ready) stalls++;
    dn_ready <= ($urandom % 5) != 0;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NBS; b++) for (int c = 0; c < C; c++) for (int t = 0; t < NBATCH*K; t++)
      spec[b][c][t] = SAMPLE_W'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin
        for (int t = 0; t < NBATCH*K; t++)
          for (int b = 0; b < NBS; b++)
            for (int c = 0; c < C; c++) begin
              in_valid <= 1;
              in_sample <= '{data: spec[b][c][t], beam: BEAM_IW'(b), chan: CHAN_IW'(c),
                             last: (b == NBS-1 && c == C-1)};
              @(posedge clk);
              while (!in_ready) @(posedge clk);
            end
        in_valid <= 0;
      end
      begin
        repeat (600) @(posedge clk);
        checks++;
        if (batches_written != 2) begin failures++; $display("FAIL %0d batches written while blocked", batches_written); end
        checks++;
        if (stalls == 0) begin failures++; $display("FAIL input never stalled"); end
        // release one batch at a time
        while (groups_done < NBATCH) begin
          groups_done <= groups_done + 1;
          repeat (40) @(posedge clk);
        end
      end
    join
    repeat (100) @(posedge clk);
    checks++;
    if (batches_written != NBATCH || nwr != NBATCH * C * K) begin failures++; $display("FAIL totals %0d %0d", batches_written, nwr); end
    checks++;
    if (nfwd != NBATCH * K * NBS * C) begin failures++; $display("FAIL forwarded %0d", nfwd); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

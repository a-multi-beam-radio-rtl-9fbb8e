// tb_antenna_summer: combining stage at reduced size (NANT=3, NPOL=2,
// NBEAM=2, C=4). Streams several integrations of random per-antenna
// spectra, with random gaps on the input and random stalls on the output,
// and checks every combined sample against sum >> shift saturated to 16
// bits, its beam/channel and its `last` flag. One integration uses large
// values and no shift, so saturation must occur.
module tb_antenna_summer;
  import tardis_pkg::*;
  localparam int unsigned NANT = 3, NPOL = 2, NBEAM = 2, C = 4, NI = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [4:0] scale_shift;
  logic in_valid = 0, in_ready, in_pol = 0, out_valid, out_ready = 0;
  logic [SAMPLE_W-1:0] in_data = '0;
  logic [1:0] in_ant = '0;
  logic [BEAM_IW-1:0] in_beam = '0;
  logic [CHAN_IW-1:0] in_chan = '0;
  spec_sample_t out_sample;
  antenna_summer #(.NANT(NANT), .NPOL(NPOL), .NBEAM(NBEAM), .C(C)) dut (.*);

  int checks = 0, failures = 0, saturations = 0, stalls = 0;
  logic [SAMPLE_W+BEAM_IW+CHAN_IW:0] expq [$];

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      logic [SAMPLE_W+BEAM_IW+CHAN_IW:0] e;
      e = expq.pop_front();
      checks++;
      if ({out_sample.data, out_sample.beam, out_sample.chan, out_sample.last} !== e) begin
        failures++;
        $display("FAIL got %h exp %h", {out_sample.data, out_sample.beam, out_sample.chan, out_sample.last}, e);
      end
    end
    if (in_valid && !in_ready) stalls++;
    out_ready <= ($urandom % 4) != 0;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned sum [NBEAM][C];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < NI; it++) begin
      logic big;
      big = (it == 2);
      scale_shift <= big ? 5'd0 : 5'(it % 3);
      for (int b = 0; b < NBEAM; b++) for (int c = 0; c < C; c++) sum[b][c] = 0;
      for (int a = 0; a < NANT; a++)
        for (int p = 0; p < NPOL; p++)
          for (int b = 0; b < NBEAM; b++)
            for (int c = 0; c < C; c++) begin
              logic [SAMPLE_W-1:0] v;
              v = big ? SAMPLE_W'(30000 + $urandom % 30000) : SAMPLE_W'($urandom);
              sum[b][c] += v;
              if (a == NANT - 1 && p == NPOL - 1) begin
                int unsigned s;
                s = sum[b][c] >> scale_shift;
                if (s > 65535) begin s = 65535; saturations++; end
                expq.push_back({s[15:0], BEAM_IW'(b), CHAN_IW'(c), 1'(b == NBEAM - 1 && c == C - 1)});
              end
              while ($urandom % 3 == 0) begin in_valid <= 0; @(posedge clk); end
              in_valid <= 1; in_data <= v; in_ant <= 2'(a); in_pol <= 1'(p);
              in_beam <= BEAM_IW'(b); in_chan <= CHAN_IW'(c);
              @(posedge clk);
              while (!in_ready) @(posedge clk);
            end
    end
    in_valid <= 0;
    repeat (50) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    checks++;
    if (saturations == 0 || stalls == 0) begin failures++; $display("FAIL saturation/stall not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

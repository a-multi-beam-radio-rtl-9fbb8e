// tb_fta: the frequency-time array at reduced size (B=2, C=5, DEPTH=16).
// Writes random words to random (channel, time) places, reads them back
// one cycle later and compares with a model array; also checks that a
// time DEPTH spectra later lands on the same place (circular buffer).
module tb_fta;
  import tardis_pkg::*;
  localparam int unsigned B = 2, C = 5, DEPTH = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [CHAN_IW-1:0] wr_chan = '0, rd_chan = '0;
  logic [3:0] wr_time = '0, rd_time = '0;
  logic [B*SAMPLE_W-1:0] wr_data = '0, rd_data;
  fta #(.B(B), .C(C), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [B*SAMPLE_W-1:0] model [C][DEPTH];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill everything
    for (int c = 0; c < C; c++)
      for (int t = 0; t < DEPTH; t++) begin
        model[c][t] = {$urandom, $urandom};
        wr_en <= 1; wr_chan <= c; wr_time <= t; wr_data <= model[c][t];
        @(posedge clk);
      end
    wr_en <= 0;
    // overwrite some with "time + DEPTH" (same place)
    for (int i = 0; i < 30; i++) begin
      int c, t;
      c = $urandom % C; t = $urandom % (2 * DEPTH);
      model[c][t % DEPTH] = {$urandom, $urandom};
      wr_en <= 1; wr_chan <= c; wr_time <= 4'(t); wr_data <= model[c][t % DEPTH];
      @(posedge clk);
    end
    wr_en <= 0;
    // read back everything, one cycle latency
    for (int c = 0; c < C; c++)
      for (int t = 0; t < DEPTH; t++) begin
        rd_en <= 1; rd_chan <= c; rd_time <= t;
        @(posedge clk);
        rd_en <= 0;
        #1;
        checks++;
        if (rd_data !== model[c][t]) begin
          failures++;
          $display("FAIL c=%0d t=%0d", c, t);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sst: the sample selection table at reduced size (D=5, C=6). Programs
// every trial entry and every channel slot with random values through the
// software ports and reads them back through the controller ports.
module tb_sst;
  import tardis_pkg::*;
  localparam int unsigned D = 5, C = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic sw_trial_we = 0, sw_slot_we = 0;
  logic [2:0] sw_trial = '0, rd_trial = '0;
  logic [CHAN_IW-1:0] sw_chan = '0, rd_chan = '0;
  sst_entry_t sw_entry = '0, rd_entry;
  logic [2:0] sw_slot = '0, rd_slot_a = '0, rd_slot_b = '0;
  chan_entry_t sw_slot_entry = '0, rd_slot_entry_a, rd_slot_entry_b;
  sst #(.D(D), .C(C)) dut (.*);

  int checks = 0, failures = 0;
  sst_entry_t  te [D][C];
  chan_entry_t se [C];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < D; d++)
      for (int c = 0; c < C; c++) begin
        te[d][c] = sst_entry_t'($urandom);
        sw_trial_we <= 1; sw_trial <= d; sw_chan <= c; sw_entry <= te[d][c];
        @(posedge clk);
      end
    sw_trial_we <= 0;
    for (int s = 0; s < C; s++) begin
      se[s] = chan_entry_t'({$urandom, $urandom});
      sw_slot_we <= 1; sw_slot <= s; sw_slot_entry <= se[s];
      @(posedge clk);
    end
    sw_slot_we <= 0;
    @(posedge clk);
    for (int d = 0; d < D; d++)
      for (int c = 0; c < C; c++) begin
        rd_trial = d; rd_chan = c; rd_slot_a = 3'(c); rd_slot_b = 3'(C - 1 - c);
        #1;
        checks += 3;
        if (rd_entry !== te[d][c]) begin failures++; $display("FAIL trial %0d chan %0d", d, c); end
        if (rd_slot_entry_a !== se[c]) begin failures++; $display("FAIL slot a %0d", c); end
        if (rd_slot_entry_b !== se[C-1-c]) begin failures++; $display("FAIL slot b %0d", C-1-c); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_acc_memory: accumulator memory at reduced size (J=4, D=5). Writes
// random J-lane words into both regions, then reads them back through the
// engine port (all lanes) and the detector port (one lane), checking that
// the two regions are independent.
module tb_acc_memory;
  import tardis_pkg::*;
  localparam int unsigned J = 4, D = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic eng_rd_region = 0, eng_wr_en = 0, eng_wr_region = 0, td_region = 0;
  logic [2:0] eng_rd_trial = '0, eng_wr_trial = '0, td_trial = '0;
  logic [1:0] td_lane = '0;
  logic [ACC_W-1:0] eng_rd_data [J], eng_wr_data [J], td_data;
  acc_memory #(.J(J), .D(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [ACC_W-1:0] model [2][D][J];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < J; j++) eng_wr_data[j] = '0;
    for (int r = 0; r < 2; r++)
      for (int d = 0; d < D; d++) begin
        for (int j = 0; j < J; j++) begin
          model[r][d][j] = $urandom;
          eng_wr_data[j] <= model[r][d][j];
        end
        eng_wr_en <= 1; eng_wr_region <= 1'(r); eng_wr_trial <= 3'(d);
        @(posedge clk);
      end
    eng_wr_en <= 0;
    @(posedge clk);
    for (int r = 0; r < 2; r++)
      for (int d = 0; d < D; d++) begin
        eng_rd_region = 1'(r); eng_rd_trial = 3'(d);
        td_region = 1'(1 - r); td_trial = 3'(d); td_lane = 2'(d % J);
        #1;
        for (int j = 0; j < J; j++) begin
          checks++;
          if (eng_rd_data[j] !== model[r][d][j]) begin failures++; $display("FAIL eng r%0d d%0d j%0d", r, d, j); end
        end
        checks++;
        if (td_data !== model[1-r][d][d % J]) begin failures++; $display("FAIL td r%0d d%0d", 1-r, d); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

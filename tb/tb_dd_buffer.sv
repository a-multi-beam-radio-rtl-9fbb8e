// tb_dd_buffer: de-dispersion buffer at reduced size (J=4, DEPTH=32).
// Fills both regions with different random samples indexed by time (with
// a window that wraps past DEPTH), then reads J-lane vectors at every base
// time and checks that lane j returns the sample of time base+j of the
// selected region, one cycle after the read.
module tb_dd_buffer;
  import tardis_pkg::*;
  localparam int unsigned J = 4, DEPTH = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_region = 0, rd_en = 0, rd_region = 0;
  logic [4:0] wr_time = '0, rd_base = '0;
  logic [SAMPLE_W-1:0] wr_data = '0, rd_data [J];
  dd_buffer #(.J(J), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [SAMPLE_W-1:0] model [2][DEPTH];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // write times 20 .. 20+DEPTH-1 (wrapping) into both regions
    for (int r = 0; r < 2; r++)
      for (int t = 20; t < 20 + DEPTH; t++) begin
        model[r][t % DEPTH] = SAMPLE_W'($urandom);
        wr_en <= 1; wr_region <= 1'(r); wr_time <= 5'(t); wr_data <= model[r][t % DEPTH];
        @(posedge clk);
      end
    wr_en <= 0;
    for (int r = 0; r < 2; r++)
      for (int base = 0; base < DEPTH; base++) begin
        rd_en <= 1; rd_region <= 1'(r); rd_base <= 5'(base);
        @(posedge clk);
        rd_en <= 0;
        #1;
        for (int j = 0; j < J; j++) begin
          checks++;
          if (rd_data[j] !== model[r][(base + j) % DEPTH]) begin
            failures++;
            $display("FAIL r%0d base %0d lane %0d", r, base, j);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dd_engine: de-dispersion circuit at reduced size (J=4, D=5).
// The testbench holds the accumulator memory. It runs an init pass (zero
// seed, as for the very first interval), then several "channels" of
// random latest/earliest sample vectors for every trial, then a second
// interval whose init pass must copy lane J-1 of the previous region.
// Expected results: A[j] = seed + sum over channels of
// sum_{i<=j} (latest[i] - earliest[i]). Also checks the timing: one step
// per two clocks, and each result written exactly 2(J+2) cycles after
// its step was presented (J+2 register stages, two clocks each).
module tb_dd_engine;
  import tardis_pkg::*;
  localparam int unsigned J = 4, D = 5, NCH = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ce = 0, in_valid = 0, in_init = 0, in_zero = 0;
  logic [2:0] in_trial = '0;
  logic [SAMPLE_W-1:0] in_lat [J], in_ear [J];
  logic [2:0] acc_rd_trial, acc_wr_trial;
  logic acc_rd_prev, acc_wr_en, busy;
  logic [ACC_W-1:0] acc_rd_data [J], acc_wr_data [J];
  dd_engine #(.J(J), .D(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [ACC_W-1:0] mem [2][D][J];
  logic [ACC_W-1:0] expect_v [2][D][J];
  logic cur = 0;
  int cyc = 0, issue_cyc [$], writes = 0;

  always_comb for (int j = 0; j < J; j++) acc_rd_data[j] = mem[acc_rd_prev ? !cur : cur][acc_rd_trial][j];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (acc_wr_en) begin
      int ic;
      for (int j = 0; j < J; j++) mem[cur][acc_wr_trial][j] <= acc_wr_data[j];
      writes++;
      ic = issue_cyc.pop_front();
      checks++;
      if (cyc - ic != 2 * (J + 2)) begin
        failures++;
        $display("FAIL latency %0d", cyc - ic);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one step: hold inputs over a ce cycle and the following idle cycle
  task automatic step(input logic v, input logic init, input logic zero, input int d);
    in_valid <= v; in_init <= init; in_zero <= zero; in_trial <= 3'(d); ce <= 1;
    if (v) issue_cyc.push_back(cyc);
    @(posedge clk);
    ce <= 0; in_valid <= 0;
    @(posedge clk);
  endtask

  task automatic run_interval(input logic first);
    // init pass
    for (int d = 0; d < D; d++) begin
      for (int j = 0; j < J; j++) expect_v[cur][d][j] = first ? '0 : mem[!cur][d][J-1];
      step(1, 1, first, d);
    end
    repeat (J + 3) step(0, 0, 0, 0);
    for (int c = 0; c < NCH; c++) begin
      for (int d = 0; d < D; d++) begin
        logic signed [31:0] pre;
        pre = 0;
        for (int j = 0; j < J; j++) begin
          in_lat[j] = SAMPLE_W'($urandom);
          in_ear[j] = SAMPLE_W'($urandom);
          pre += int'(in_lat[j]) - int'(in_ear[j]);
          expect_v[cur][d][j] += ACC_W'(pre);
        end
        step(1, 0, 0, d);
      end
      repeat (J + 3) step(0, 0, 0, 0);
    end
    for (int d = 0; d < D; d++)
      for (int j = 0; j < J; j++) begin
        checks++;
        if (mem[cur][d][j] !== expect_v[cur][d][j]) begin
          failures++;
          $display("FAIL d%0d j%0d got %0d exp %0d", d, j, mem[cur][d][j], expect_v[cur][d][j]);
        end
      end
  endtask

  initial begin
    for (int j = 0; j < J; j++) begin in_lat[j] = '0; in_ear[j] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_interval(1);
    cur = !cur;
    run_interval(0);
    checks++;
    if (writes != 2 * D * (NCH + 1)) begin failures++; $display("FAIL writes %0d", writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

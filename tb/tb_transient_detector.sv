// tb_transient_detector: transient detector at reduced size (J=4, D=3).
// The testbench plays the accumulator memory. Over several groups it
// presents noise-like de-dispersed samples, with a strong spike in one
// trial of one group, and checks against its own model of the detector:
//  - the streamed time series,
//  - every detection-flag vector (boxcar averages of pairs, IIR mean
//    and variance with M = 4 and S = 256, integer square root, test
//    x - mu > xi * sigma, all in the same fixed-point format),
//  - the statistics monitor port after the last group,
//  - the processing time: exactly N_T * (45J - 17) busy cycles per group.
module tb_transient_detector;
  import tardis_pkg::*;
  localparam int unsigned J = 4, D = 3, F = 8, LEV = 3, NG = 12;
  localparam int unsigned SPIKE_G = 9, SPIKE_D = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, stats_init = 0, busy, ts_valid, flags_valid;
  logic [1:0] n_trials = 2'(D);
  logic [3:0] log2m = 2, log2s = 8;
  logic [5:0] xi = 6;
  logic [1:0] acc_trial, ts_trial, mon_trial = '0;
  logic [1:0] acc_lane, ts_index, mon_level = '0;
  logic [ACC_W-1:0] acc_data, ts_data;
  logic [D-1:0] flags;
  logic signed [ACC_W+F:0] mon_mean;
  logic [63:0] mon_var;
  transient_detector #(.J(J), .D(D), .F(F)) dut (.*);

  int checks = 0, failures = 0;
  logic [ACC_W-1:0] samples [D][J];
  assign acc_data = samples[acc_trial][acc_lane];

  // model state
  logic signed [127:0] mu [D][LEV];
  logic [127:0]        vr [D][LEV];
  logic [D-1:0]        exp_flags;
  int busy_cycles = 0, nflags = 0, ngroups_done = 0, nts = 0, ndet = 0;

  function automatic logic [127:0] isqrt(input logic [127:0] v);
    logic [127:0] r = 0;
    for (int b = 63; b >= 0; b--) begin
      logic [127:0] t;
      t = r | (128'd1 << b);
      if (t * t <= v) r = t;
    end
    return r;
  endfunction

  task automatic model_group(input logic first);
    logic [127:0] bc [2*J-1];
    exp_flags = '0;
    for (int d = 0; d < D; d++) begin
      for (int j = 0; j < J; j++) bc[j] = samples[d][j];
      for (int i = 0; i < J - 1; i++) bc[J+i] = (bc[2*i] + bc[2*i+1]) >> 1;
      for (int i = 0; i < 2*J - 1; i++) begin
        int l;
        logic signed [127:0] xs, dp, dc, mn, prod, nv;
        l = (i < J) ? 0 : (i < J + J/2) ? 1 : 2;
        xs = bc[i] << F;
        if (first) begin mu[d][l] = xs; vr[d][l] = 0; end
        dp = xs - mu[d][l];
        mn = mu[d][l] + (dp >>> log2m);
        dc = xs - mn;
        prod = dp * dc;
        nv = ((prod - $signed(vr[d][l])) >>> log2s) + $signed(vr[d][l]);
        if (nv < 0) nv = 0;
        if (nv > 128'hFFFF_FFFF_FFFF_FFFF) nv = 128'hFFFF_FFFF_FFFF_FFFF;
        mu[d][l] = mn;
        vr[d][l] = nv;
        if (dc > $signed(xi * isqrt(nv))) exp_flags[d] = 1'b1;
      end
    end
  endtask

  always @(posedge clk) begin
    if (busy && rst_n) busy_cycles++;
    if (ts_valid && rst_n) begin
      nts++;
      checks++;
      if (ts_data !== samples[ts_trial][ts_index]) begin failures++; $display("FAIL ts t=%0t trial %0d idx %0d", $time, ts_trial, ts_index); end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int g = 0; g < NG; g++) begin
      for (int d = 0; d < D; d++)
        for (int j = 0; j < J; j++) samples[d][j] = 1000 + ($urandom % 200);
      if (g == SPIKE_G) samples[SPIKE_D][2] = 40000;
      model_group(g == 0);
      busy_cycles = 0;
      start <= 1; stats_init <= (g == 0);
      @(posedge clk);
      start <= 0;
      while (!flags_valid) @(posedge clk);
      #1;
      checks++;
      if (flags !== exp_flags) begin
        failures++;
        $display("FAIL group %0d flags %b expected %b", g, flags, exp_flags);
      end
      if (g == SPIKE_G && flags[SPIKE_D]) ndet++;
      checks++;
      if (busy_cycles != D * (45 * J - 17)) begin
        failures++;
        $display("FAIL group %0d took %0d cycles, expected %0d", g, busy_cycles, D * (45 * J - 17));
      end
      @(posedge clk);
    end
    // statistics monitor port
    for (int d = 0; d < D; d++)
      for (int l = 0; l < LEV; l++) begin
        mon_trial = 2'(d); mon_level = 2'(l);
        #1;
        checks += 2;
        if (mon_mean !== (ACC_W+F+1)'(mu[d][l])) begin failures++; $display("FAIL mean d%0d l%0d", d, l); end
        if (mon_var !== 64'(vr[d][l])) begin failures++; $display("FAIL var d%0d l%0d", d, l); end
      end
    checks++;
    if (ndet != 1) begin failures++; $display("FAIL spike not detected"); end
    checks++;
    if (nts != NG * D * J) begin failures++; $display("FAIL ts count %0d", nts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

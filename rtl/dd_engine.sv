// dd_engine: the de-dispersion circuit of one beam (Fig. 6 of the
// description this design follows), generalised to J lanes.
//
// For one trial d and one channel c it adds the channel's contribution to
// the next J de-dispersed samples A[d,n+1..n+J] using the differencing form
//   A[n+j] = A[n] + sum_c sum_{i=1..j} ( S[c,n+i+L] - S[c,n+i+E-1] ).
// Lane j first forms the difference of its "latest" and "earliest-minus-
// one" samples (J subtractors). A ripple of J-1 adders, one per pipeline
// stage, turns the differences into prefix sums, so lane j holds the sum
// of the differences of lanes 1..j. Finally J adders add those prefix sums
// to the J partial sums read from the accumulator memory (A_R) and the
// results (A_W) are written back. That is 3J-1 operations per step.
//
// A multiplexer in front of the output registers selects, for an "init"
// step, the last fully de-dispersed sample A[d,n] of the previous interval
// (lane J-1 of the accumulator word read from the previous region, or zero
// for the very first interval) for all J lanes; this seeds the A[n] term.
//
// Timing: the circuit advances only when `ce` is high, which the
// controller raises every second clock. The pipeline has J+2 register
// stages (input, difference, J-1 prefix stages, output). The accumulator
// word of the step about to enter the last stage is read combinationally
// in the `ce` cycle (acc_rd_*), and the result is written in the following
// cycle (acc_wr_*), so reads and writes of the accumulator alternate.
// Lanes are wrap-around ACC_W-bit sums.
//
// Lint note: rst_n also appears in the `disable iff` of the ce assertion,
// a synchronous use next to the asynchronous reset of the registers; it
// is verification only and adds no logic.
module dd_engine
  import tardis_pkg::*;
#(
  parameter int unsigned J = 16,
  parameter int unsigned D = 448
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     ce,
  input  logic                     in_valid,
  input  logic                     in_init,
  input  logic                     in_zero,
  input  logic [$clog2(D)-1:0]     in_trial,
  input  logic [SAMPLE_W-1:0]      in_lat [J],
  input  logic [SAMPLE_W-1:0]      in_ear [J],
  // accumulator read (combinational, in the ce cycle)
  output logic [$clog2(D)-1:0]     acc_rd_trial,
  output logic                     acc_rd_prev,
  input  logic [ACC_W-1:0]         acc_rd_data [J],
  // accumulator write (cycle after ce)
  output logic                     acc_wr_en,
  output logic [$clog2(D)-1:0]     acc_wr_trial,
  output logic [ACC_W-1:0]         acc_wr_data [J],
  output logic                     busy
);
  localparam int unsigned DW = SAMPLE_W + 1 + $clog2(J);
  localparam int unsigned NS = J + 2;   // register stages 0..J+1
  localparam int unsigned TRW = $clog2(D);

  typedef struct packed {
    logic           valid;
    logic           init;
    logic           zero;
    logic [TRW-1:0] trial;
  } meta_t;

  meta_t                 meta [NS];
  logic [SAMPLE_W-1:0]   lat0 [J];
  logic [SAMPLE_W-1:0]   ear0 [J];
  logic signed [DW-1:0]  v    [J+1][J];   // v[s] = stage s registers, s = 1..J
  logic                  wr_pending;

  // stage 0: input registers
  always_ff @(posedge clk) begin
    if (ce) begin
      lat0 <= in_lat;
      ear0 <= in_ear;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NS; s++) meta[s] <= '0;
    end else if (ce) begin
      meta[0] <= '{valid: in_valid, init: in_init, zero: in_zero, trial: in_trial};
      for (int s = 1; s < NS; s++) meta[s] <= meta[s-1];
    end
  end

  // stage 1: subtractors; stages 2..J: prefix-sum adders (one per stage)
  always_ff @(posedge clk) begin
    if (ce) begin
      for (int j = 0; j < J; j++)
        v[1][j] <= DW'(signed'({1'b0, lat0[j]})) - DW'(signed'({1'b0, ear0[j]}));
      for (int s = 2; s <= J; s++) begin
        v[s][0] <= v[s-1][0];
        for (int j = 1; j < J; j++)
          v[s][j] <= (j == s - 1) ? v[s-1][j] + v[s-1][j-1] : v[s-1][j];
      end
    end
  end

  // stage J+1: accumulate adders and init multiplexer
  assign acc_rd_trial = meta[J].trial;
  assign acc_rd_prev  = meta[J].init;

  always_ff @(posedge clk) begin
    if (ce) begin
      for (int j = 0; j < J; j++) begin
        if (meta[J].init)
          acc_wr_data[j] <= meta[J].zero ? '0 : acc_rd_data[J-1];
        else
          acc_wr_data[j] <= acc_rd_data[j] + ACC_W'(v[J][j]);
      end
      acc_wr_trial <= meta[J].trial;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  wr_pending <= 1'b0;
    else if (ce) wr_pending <= meta[J].valid;
    else         wr_pending <= 1'b0;
  end

  assign acc_wr_en = wr_pending && !ce;

  always_comb begin
    busy = wr_pending;
    for (int s = 0; s < NS; s++) busy |= meta[s].valid;
  end

  // ce must leave a cycle between steps for the accumulator write
  a_ce_spacing: assert property (@(posedge clk) disable iff (!rst_n) ce |=> !ce);
endmodule

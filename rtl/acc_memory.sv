// acc_memory: accumulator memory of one beam.
//
// Holds the de-dispersed time series being built: for every trial, J
// ACC_W-bit samples, in two regions. While the de-dispersion engine
// updates the J samples of the current interval in one region, the
// transient detector reads the previous interval's finished samples from
// the other; the controller swaps the roles when both are done.
//
// Storage is J banks, one per lane, so the engine reads or writes all J
// samples of a trial at once. Bank word (region, trial) is at address
// region*D + trial.
//
// Ports: an engine read port (J lanes, combinational), an engine write port
// (J lanes), and a detector read port (one lane, combinational). The
// engine reads the previous region only in its init steps, to fetch the
// last finished sample of each trial.
module acc_memory
  import tardis_pkg::*;
#(
  parameter int unsigned J = 16,
  parameter int unsigned D = 448
) (
  input  logic                     clk,
  input  logic                     eng_rd_region,
  input  logic [$clog2(D)-1:0]     eng_rd_trial,
  output logic [ACC_W-1:0]         eng_rd_data [J],
  input  logic                     eng_wr_en,
  input  logic                     eng_wr_region,
  input  logic [$clog2(D)-1:0]     eng_wr_trial,
  input  logic [ACC_W-1:0]         eng_wr_data [J],
  input  logic                     td_region,
  input  logic [$clog2(D)-1:0]     td_trial,
  input  logic [$clog2(J)-1:0]     td_lane,
  output logic [ACC_W-1:0]         td_data
);
  localparam int unsigned AW = $clog2(2*D);

  logic [ACC_W-1:0] td_lane_data [J];

  for (genvar j = 0; j < J; j++) begin : g_bank
    logic [ACC_W-1:0] mem [2*D];
    always_ff @(posedge clk) begin
      if (eng_wr_en) mem[AW'(eng_wr_region) * AW'(D) + AW'(eng_wr_trial)] <= eng_wr_data[j];
    end
    assign eng_rd_data[j]  = mem[AW'(eng_rd_region) * AW'(D) + AW'(eng_rd_trial)];
    assign td_lane_data[j] = mem[AW'(td_region) * AW'(D) + AW'(td_trial)];
  end

  assign td_data = td_lane_data[td_lane];
endmodule

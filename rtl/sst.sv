// sst: the sample selection table, programmed by software.
//
// Trial part: for every trial d and channel c, the sample offsets
// (eoff, loff) that bound the de-dispersion sum of eq. (3):
//   A[d,m] = sum_c sum_{t = m-eoff .. m-loff} S[c,t]
// i.e. the paper's E = -eoff and L = -loff relative to the newest sample.
// Entry (d, c) is at address d*C + c.
//
// Channel part: one entry per processing slot giving the channel to
// process in that slot, its enable bit, and the fetch window of that
// channel (largest eoff and smallest loff over the trials). Slots are
// processed in order, so software sets the (interleaved) channel order,
// disables channels, and tells the fetcher how many samples to read.
//
// Interface: software write ports for both parts; combinational read
// ports for the de-dispersion controller.
//
// The paper keeps the SST in SDRAM and names only its purpose; the
// channel part, the offset encoding and the on-chip array are this
// design's choices.
module sst
  import tardis_pkg::*;
#(
  parameter int unsigned D = 448,
  parameter int unsigned C = 304
) (
  input  logic                          clk,
  // software programming
  input  logic                          sw_trial_we,
  input  logic [$clog2(D)-1:0]          sw_trial,
  input  logic [CHAN_IW-1:0]            sw_chan,
  input  sst_entry_t                    sw_entry,
  input  logic                          sw_slot_we,
  input  logic [$clog2(C)-1:0]          sw_slot,
  input  chan_entry_t                   sw_slot_entry,
  // controller reads
  input  logic [$clog2(D)-1:0]          rd_trial,
  input  logic [CHAN_IW-1:0]            rd_chan,
  output sst_entry_t                    rd_entry,
  input  logic [$clog2(C)-1:0]          rd_slot_a,
  output chan_entry_t                   rd_slot_entry_a,
  input  logic [$clog2(C)-1:0]          rd_slot_b,
  output chan_entry_t                   rd_slot_entry_b
);
  localparam int unsigned AW = $clog2(D*C);

  sst_entry_t  trial_mem [D*C];
  chan_entry_t slot_mem  [C];

  always_ff @(posedge clk) begin
    if (sw_trial_we) trial_mem[AW'(sw_trial) * AW'(C) + AW'(sw_chan)] <= sw_entry;
    if (sw_slot_we)  slot_mem[sw_slot] <= sw_slot_entry;
  end

  assign rd_entry        = trial_mem[AW'(rd_trial) * AW'(C) + AW'(rd_chan)];
  assign rd_slot_entry_a = slot_mem[rd_slot_a];
  assign rd_slot_entry_b = slot_mem[rd_slot_b];
endmodule

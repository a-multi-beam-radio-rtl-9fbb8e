// dd_buffer: de-dispersion buffer of one beam.
//
// Caches the samples of one frequency channel fetched from the FTA so the
// de-dispersion engine can read J time-consecutive samples in a single
// cycle. The storage is split over J banks ("time striping"): the sample
// of time t lives in bank (t mod J), row (t div J) mod (DEPTH/J). Any J
// consecutive times therefore fall into J different banks. A read names
// the first time `rd_base`; each bank computes its own row, and a barrel
// shifter rotates the bank outputs so that output lane j carries the
// sample of time rd_base + j.
//
// The buffer is double-buffered: two regions, one being filled by the
// fetcher (`wr_region`) while the engine reads the other (`rd_region`).
//
// Interface: one sample write per cycle; one J-lane read per cycle with
// one cycle of latency (the engine issues the J latest samples and the J
// earliest samples on alternate cycles). Only the low log2(DEPTH) bits
// of the times are used.
//
// From the paper: J block memories, time striping, barrel shifters driven
// by the sample indices, two regions. The region depth (one full FTA
// channel, so any fetch window fits) is this design's choice.
//
// Lint note: the low log2(J) bits of each bank's computed time are unused
// because they equal the bank number; only the row bits address memory.
module dd_buffer
  import tardis_pkg::*;
#(
  parameter int unsigned J     = 16,
  parameter int unsigned DEPTH = 16384
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic                      wr_region,
  input  logic [$clog2(DEPTH)-1:0]  wr_time,
  input  logic [SAMPLE_W-1:0]       wr_data,
  input  logic                      rd_en,
  input  logic                      rd_region,
  input  logic [$clog2(DEPTH)-1:0]  rd_base,
  output logic [SAMPLE_W-1:0]       rd_data [J]
);
  localparam int unsigned JW   = $clog2(J);
  localparam int unsigned TW   = $clog2(DEPTH);
  localparam int unsigned ROWS = DEPTH / J;

  logic [SAMPLE_W-1:0] bank_q [J];
  logic [JW-1:0]       rot_q;

  for (genvar b = 0; b < J; b++) begin : g_bank
    logic [SAMPLE_W-1:0] mem [2*ROWS];
    logic [JW-1:0]       off;
    logic [TW-1:0]       t;
    assign off = JW'(b) - rd_base[JW-1:0];
    assign t   = rd_base + TW'(off);
    always_ff @(posedge clk) begin
      if (wr_en && wr_time[JW-1:0] == JW'(b))
        mem[{wr_region, wr_time[TW-1:JW]}] <= wr_data;
      if (rd_en)
        bank_q[b] <= mem[{rd_region, t[TW-1:JW]}];
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) rot_q <= rd_base[JW-1:0];
  end

  // barrel shifter: lane j takes the bank holding time rd_base + j
  always_comb begin
    for (int j = 0; j < J; j++) rd_data[j] = bank_q[JW'(j) + rot_q];
  end

  initial begin
    assert (DEPTH % J == 0 && (1 << JW) == J) else $error("J must be a power of 2 dividing DEPTH");
  end
endmodule

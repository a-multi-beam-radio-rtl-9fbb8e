// corner_turner: input stage of one de-disperser (DD) FPGA.
//
// The combined-beam spectra stream passes through every DD FPGA in a
// daisy chain. Each sample is forwarded unchanged to the next FPGA
// (registered, with back-pressure), and the samples of this FPGA's own
// B beams (beam_base .. beam_base+B-1) are captured into a batch buffer
// holding K spectra. The stream arrives spectrum by spectrum; the FTA is
// read channel by channel, so a full batch is written out "corner-turned":
// for each channel, K words (times t0 .. t0+K-1), each word carrying the
// B beams of one channel and time. That is one burst of K contiguous FTA
// words per channel.
//
// The batch buffer has two halves: one fills from the stream while the
// other is written to the FTA. Batch b (spectra bK .. bK+K-1) is only
// written once the de-disperser has finished group b-1 (b <= groups_done
// + 1), so a batch never overwrites FTA samples that the group being
// de-dispersed still needs. When both halves are full the input stalls
// (in_ready low), which is the flow control seen by the data source.
//
// Interface: valid/ready streams in and out; FTA write port, one word per
// cycle; `batches_written` counts batches in the FTA.
//
// From the description: forwarding, extraction of the B beams, buffering
// and re-ordering, batches of K = 16 spectra, interleaved beams in the FTA.
// The two-half buffer and the overwrite rule are this design's choices.
module corner_turner
  import tardis_pkg::*;
#(
  parameter int unsigned B     = 9,
  parameter int unsigned K     = 16,
  parameter int unsigned C     = 304,
  parameter int unsigned DEPTH = 16384
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [BEAM_IW-1:0]        beam_base,
  // spectra from upstream
  input  logic                      in_valid,
  output logic                      in_ready,
  input  spec_sample_t              in_sample,
  // spectra forwarded downstream
  output logic                      dn_valid,
  input  logic                      dn_ready,
  output spec_sample_t              dn_sample,
  // FTA write port
  output logic                      fta_wr_en,
  output logic [CHAN_IW-1:0]        fta_wr_chan,
  output logic [$clog2(DEPTH)-1:0]  fta_wr_time,
  output logic [B*SAMPLE_W-1:0]     fta_wr_data,
  // flow control with the de-disperser
  input  logic [31:0]               groups_done,
  output logic [31:0]               batches_written
);
  localparam int unsigned KW = $clog2(K);
  localparam int unsigned CW = $clog2(C);
  localparam int unsigned AW = $clog2(2*K*C);
  localparam int unsigned TW = $clog2(DEPTH);
  localparam int unsigned LNW = (B > 1) ? $clog2(B) : 1;

  logic [SAMPLE_W-1:0] cbuf [2*K*C][B];

  logic          fsel, wsel;
  logic [1:0]    full;
  logic [KW-1:0] kcnt;
  logic          take, mine;
  logic [BEAM_IW-1:0] lane;
  logic          wr_active;
  logic [CW-1:0] wc;
  logic [KW-1:0] wk;

  assign in_ready = (dn_ready || !dn_valid) && !full[fsel];
  assign take     = in_valid && in_ready;
  assign lane     = in_sample.beam - beam_base;
  assign mine     = (in_sample.beam >= beam_base) && (lane < BEAM_IW'(B));

  function automatic logic [AW-1:0] baddr(input logic r, input logic [KW-1:0] k,
                                          input logic [CHAN_IW-1:0] c);
    return AW'(r) * AW'(K*C) + AW'(k) * AW'(C) + AW'(c);
  endfunction

  // batch buffer write, one lane per accepted sample
  always_ff @(posedge clk) begin
    if (take && mine && in_sample.chan < CHAN_IW'(C))
      cbuf[baddr(fsel, kcnt, in_sample.chan)][LNW'(lane)] <= in_sample.data;
  end

  // fill side
  logic fill_done, drain_done;
  assign fill_done  = take && in_sample.last && (kcnt == KW'(K-1));
  assign drain_done = wr_active && (wc == CW'(C-1)) && (wk == KW'(K-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fsel <= 1'b0;
      kcnt <= '0;
      full <= '0;
    end else begin
      if (take && in_sample.last) kcnt <= kcnt + 1'b1;
      if (fill_done) fsel <= ~fsel;
      for (int r = 0; r < 2; r++) begin
        if (fill_done && fsel == 1'(r)) full[r] <= 1'b1;
        else if (drain_done && wsel == 1'(r)) full[r] <= 1'b0;
      end
    end
  end

  // forward path
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dn_valid  <= 1'b0;
      dn_sample <= '0;
    end else if (dn_ready || !dn_valid) begin
      dn_valid  <= take;
      dn_sample <= in_sample;
    end
  end

  // drain side: corner-turned burst writes to the FTA
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wsel            <= 1'b0;
      wr_active       <= 1'b0;
      wc              <= '0;
      wk              <= '0;
      batches_written <= '0;
      fta_wr_en       <= 1'b0;
      fta_wr_chan     <= '0;
      fta_wr_time     <= '0;
    end else begin
      fta_wr_en <= 1'b0;
      if (!wr_active) begin
        if (full[wsel] && batches_written <= groups_done + 32'd1) begin
          wr_active <= 1'b1;
          wc        <= '0;
          wk        <= '0;
        end
      end else begin
        fta_wr_en   <= 1'b1;
        fta_wr_chan <= CHAN_IW'(wc);
        fta_wr_time <= TW'(batches_written * K) + TW'(wk);
        wk <= wk + 1'b1;
        if (wk == KW'(K-1)) begin
          wk <= '0;
          wc <= wc + 1'b1;
        end
        if (drain_done) begin
          wr_active       <= 1'b0;
          wsel            <= ~wsel;
          batches_written <= batches_written + 32'd1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < B; b++)
      fta_wr_data[b*SAMPLE_W +: SAMPLE_W] <= cbuf[baddr(wsel, wk, CHAN_IW'(wc))][b];
  end

  initial begin
    assert ((1 << KW) == K) else $error("K must be a power of 2");
  end
endmodule

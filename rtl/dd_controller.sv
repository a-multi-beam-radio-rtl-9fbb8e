// dd_controller: the common state machines of a de-disperser FPGA. All
// B de-dispersers work in lock step, so one controller drives them all;
// only their data paths are replicated.
//
// Group g covers the de-dispersed samples m = gJ .. gJ+J-1 of every
// trial. It starts once the corner-turner has written batch g to the FTA
// (spectra up to time gJ+J-1). It runs in three parts:
//
//  * Init pass: one engine step per active trial copies the last finished
//    sample of group g-1 (zero for the very first group) into all J lanes
//    of the trial's accumulators.
//  * Channel passes: the processing slots of the SST channel table are
//    visited in order, skipping disabled ones. For each channel the
//    fetcher reads the channel's window of samples, times
//    gJ-eoff_max-1 .. gJ+J-1-loff_min, from the FTA (one word = all B
//    beams per cycle; times before the first spectrum read as zero) into
//    one region of the de-dispersion buffers, while the engines work on
//    the previous channel from the other region. For each active trial
//    the controller reads the SST entry (eoff, loff), reads the J latest
//    samples (times gJ-loff ..) in one cycle and the J earliest-minus-one
//    samples (times gJ-eoff-1 ..) in the next, and clocks one engine step
//    every second cycle. Between channels (and after the init pass) it
//    lets the engine pipeline drain so no accumulator is read before its
//    previous update is written.
//  * Completion: when all channels are done and the transient detectors
//    have finished the previous group, the accumulator regions swap, the
//    detectors start on group g, and `groups_done` advances (which lets
//    the corner-turner write further batches).
//
// Timing of the engine interface: `ph` toggles every cycle; engine steps
// happen on ph = 0 cycles (eng_ce). Buffer reads return one cycle later.
//
// From the description: one channel at a time across all trials, double
// buffering of the de-dispersion buffer and accumulator memory, latest
// then earliest read on alternate cycles, init reads at the start of an
// interval, skipped channels and the programmable number of trials N_T,
// detector started on the finished region. The drain between channels,
// the fetch-window fields of the channel table and the zero samples
// before the first spectrum are this design's choices.
//
// Lint note: the processor uses only the channel and enable fields of its
// channel-table entry (the window fields serve the fetcher), so the other
// bits of slot_p_entry are unused.
module dd_controller
  import tardis_pkg::*;
#(
  parameter int unsigned J     = 16,
  parameter int unsigned D     = 448,
  parameter int unsigned C     = 304,
  parameter int unsigned DEPTH = 16384
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(D+1)-1:0]    n_trials,
  input  logic [31:0]               batches_written,
  output logic [31:0]               groups_done,
  // SST
  output logic [$clog2(D)-1:0]      sst_trial,
  output logic [CHAN_IW-1:0]        sst_chan,
  input  sst_entry_t                sst_entry,
  output logic [$clog2(C)-1:0]      slot_f,
  input  chan_entry_t               slot_f_entry,
  output logic [$clog2(C)-1:0]      slot_p,
  input  chan_entry_t               slot_p_entry,
  // FTA read
  output logic                      fta_rd_en,
  output logic [CHAN_IW-1:0]        fta_rd_chan,
  output logic [$clog2(DEPTH)-1:0]  fta_rd_time,
  // de-dispersion buffer write (data comes from the FTA word)
  output logic                      buf_wr_en,
  output logic                      buf_wr_region,
  output logic [$clog2(DEPTH)-1:0]  buf_wr_time,
  output logic                      buf_wr_zero,
  // de-dispersion buffer read
  output logic                      buf_rd_en,
  output logic                      buf_rd_region,
  output logic [$clog2(DEPTH)-1:0]  buf_rd_base,
  // engines
  output logic                      eng_ce,
  output logic                      eng_valid,
  output logic                      eng_init,
  output logic                      eng_zero,
  output logic [$clog2(D)-1:0]      eng_trial,
  output logic                      eng_lat_sel,   // 1: hold latest samples
  input  logic                      eng_busy,
  output logic                      acc_cur,       // region written by the engines
  // transient detectors
  input  logic                      td_busy,
  output logic                      td_start,
  output logic                      td_region,
  output logic                      td_stats_init,
  // status
  output logic                      active,
  output logic [31:0]               channels_done
);
  localparam int unsigned TW  = $clog2(DEPTH);
  localparam int unsigned TRW = $clog2(D);
  localparam int unsigned SW  = $clog2(C);

  typedef enum logic [2:0] {P_IDLE, P_INIT, P_SEL, P_RUN, P_DRAIN, P_FINAL} pstate_t;
  typedef enum logic [1:0] {F_IDLE, F_RUN, F_DONE} fstate_t;

  pstate_t pst;
  fstate_t fst;
  logic    ph;
  logic [31:0] g;
  logic        first;
  logic        drain_to_sel;   // drain after init pass (1) or channel (0)

  // group base time gJ
  logic signed [33:0] gj;
  assign gj = 34'(g) * 34'(J);

  // ---------------- fetcher ----------------
  logic [SW:0]        fs;           // fetch slot pointer (C = done)
  logic [31:0]        fetched, proc_cnt;
  logic signed [33:0] ft, ft_end;
  logic [CHAN_IW-1:0] fchan;
  logic               fregion;
  logic               f_last, f_last_d;
  logic               fta_rd_neg;       // time of the current read is before the first spectrum

  assign slot_f = SW'(fs);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst       <= F_IDLE;
      fs        <= '0;
      fetched   <= '0;
      ft        <= '0;
      ft_end    <= '0;
      fchan     <= '0;
      fregion   <= 1'b0;
      f_last    <= 1'b0;
      f_last_d  <= 1'b0;
      fta_rd_en <= 1'b0;
      fta_rd_chan <= '0;
      fta_rd_time <= '0;
      fta_rd_neg  <= 1'b0;
      buf_wr_en <= 1'b0;
      buf_wr_region <= 1'b0;
      buf_wr_time <= '0;
      buf_wr_zero <= 1'b0;
    end else begin
      // FTA read data appears one cycle after the read: write it then
      buf_wr_en     <= fta_rd_en;
      buf_wr_region <= fregion;
      buf_wr_time   <= fta_rd_time;
      buf_wr_zero   <= fta_rd_neg;
      fta_rd_en     <= 1'b0;
      f_last_d      <= f_last;
      f_last        <= 1'b0;
      if (f_last_d) fetched <= fetched + 32'd1;
      if (pst == P_IDLE) begin
        fst     <= F_IDLE;
        fs      <= '0;
        fetched <= '0;
      end else case (fst)
        F_IDLE: begin
          if (fs == (SW+1)'(C)) fst <= F_DONE;
          else if (!slot_f_entry.en) fs <= fs + 1'b1;
          else if (fetched < proc_cnt + 32'd2 && !f_last && !f_last_d) begin
            // a buffer region is free: start fetching this channel
            fchan   <= slot_f_entry.chan;
            fregion <= fetched[0];
            ft      <= gj - 34'(slot_f_entry.eoff_max) - 34'sd1;
            ft_end  <= gj + 34'(J) - 34'sd1 - 34'(slot_f_entry.loff_min);
            fst     <= F_RUN;
          end
        end
        F_RUN: begin
          fta_rd_en   <= 1'b1;
          fta_rd_chan <= fchan;
          fta_rd_time <= TW'(ft);
          fta_rd_neg  <= ft < 0;
          ft          <= ft + 34'sd1;
          if (ft >= ft_end) begin
            f_last <= 1'b1;
            fs     <= fs + 1'b1;
            fst    <= F_IDLE;
          end
        end
        default: ;
      endcase
    end
  end

  // ---------------- processor ----------------
  logic [SW:0]        ps;
  logic [TRW:0]       d;
  logic [CHAN_IW-1:0] pchan;
  logic               pregion;
  logic               iss_v, iss_init;     // issued at ph 0
  logic [TRW-1:0]     iss_trial;
  logic [TW-1:0]      iss_ear;
  logic               st_v, st_init;       // waiting for the engine at next ph 0
  logic [TRW-1:0]     st_trial;

  assign slot_p    = SW'(ps);
  assign sst_trial = TRW'(d);
  assign sst_chan  = pchan;
  assign eng_ce    = !ph;
  assign eng_valid = st_v && !ph;
  assign eng_init  = st_init;
  assign eng_zero  = first;
  assign eng_trial = st_trial;
  assign eng_lat_sel = ph;     // latest samples return on ph 1 cycles

  // buffer reads: latest on ph 0, earliest on ph 1
  always_comb begin
    buf_rd_region = pregion;
    buf_rd_en     = 1'b0;
    buf_rd_base   = iss_ear;
    if (!ph && pst == P_RUN && d < (TRW+1)'(n_trials)) begin
      buf_rd_en   = 1'b1;
      buf_rd_base = TW'(gj - 34'(sst_entry.loff));
    end else if (ph && iss_v && !iss_init) begin
      buf_rd_en   = 1'b1;
      buf_rd_base = iss_ear;
    end
  end

  assign active = (pst != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pst           <= P_IDLE;
      ph            <= 1'b0;
      g             <= '0;
      first         <= 1'b1;
      groups_done   <= '0;
      channels_done <= '0;
      ps            <= '0;
      d             <= '0;
      pchan         <= '0;
      pregion       <= 1'b0;
      proc_cnt      <= '0;
      drain_to_sel  <= 1'b0;
      iss_v <= 1'b0; iss_init <= 1'b0; iss_trial <= '0; iss_ear <= '0;
      st_v  <= 1'b0; st_init  <= 1'b0; st_trial  <= '0;
      acc_cur       <= 1'b0;
      td_start      <= 1'b0;
      td_region     <= 1'b1;
      td_stats_init <= 1'b1;
    end else begin
      ph       <= ~ph;
      td_start <= 1'b0;
      if (ph) begin
        // ph 1: issued step moves to the engine input stage
        st_v     <= iss_v;
        st_init  <= iss_init;
        st_trial <= iss_trial;
        iss_v    <= 1'b0;
      end else begin
        st_v <= 1'b0;
      end
      case (pst)
        P_IDLE: if (batches_written > g) begin
          pst      <= P_INIT;
          d        <= '0;
          ps       <= '0;
          proc_cnt <= '0;
        end
        P_INIT: if (!ph) begin
          if (d < (TRW+1)'(n_trials)) begin
            iss_v     <= 1'b1;
            iss_init  <= 1'b1;
            iss_trial <= TRW'(d);
            d         <= d + 1'b1;
          end else begin
            pst          <= P_DRAIN;
            drain_to_sel <= 1'b1;
          end
        end
        P_SEL: begin
          if (ps == (SW+1)'(C)) pst <= P_FINAL;
          else if (!slot_p_entry.en) ps <= ps + 1'b1;
          else if (proc_cnt < fetched && !ph) begin
            pchan   <= slot_p_entry.chan;
            pregion <= proc_cnt[0];
            d       <= '0;
            pst     <= P_RUN;
          end
        end
        P_RUN: if (!ph) begin
          if (d < (TRW+1)'(n_trials)) begin
            iss_v     <= 1'b1;
            iss_init  <= 1'b0;
            iss_trial <= TRW'(d);
            iss_ear   <= TW'(gj - 34'(sst_entry.eoff) - 34'sd1);
            d         <= d + 1'b1;
          end else begin
            pst          <= P_DRAIN;
            drain_to_sel <= 1'b0;
          end
        end
        P_DRAIN: if (!iss_v && !st_v && !eng_busy) begin
          pst <= P_SEL;
          if (!drain_to_sel) begin
            proc_cnt      <= proc_cnt + 32'd1;
            ps            <= ps + 1'b1;
            channels_done <= channels_done + 32'd1;
          end
        end
        P_FINAL: if (!td_busy && !td_start) begin
          td_region     <= acc_cur;
          acc_cur       <= ~acc_cur;
          td_start      <= 1'b1;
          td_stats_init <= first;
          first         <= 1'b0;
          groups_done   <= groups_done + 32'd1;
          g             <= g + 32'd1;
          pst           <= P_IDLE;
        end
        default: pst <= P_IDLE;
      endcase
    end
  end
endmodule

// transient_detector: searches the de-dispersed time series of one beam
// for pulses, one trial at a time, one group of J samples per interval.
//
// Per trial d it:
//  1. loads the J finished samples A[d,n..n+J-1] from the accumulator
//     memory into a boxcar RAM of 2J-1 words (level 0), and streams them
//     out as the de-dispersed time series;
//  2. processes the 2J-1 boxcar samples x[d,l,k] (levels l = 0..log2 J;
//     level l has J/2^l samples, each the average of two adjacent samples
//     of level l-1, computed into the RAM while earlier samples are being
//     searched, so location J+i holds (RAM[2i] + RAM[2i+1]) / 2);
//  3. for each sample, updates the running mean and variance of (d, l)
//       mu_n  = mu_{n-1} + (x - mu_{n-1}) / M
//       var_n = ((S-1) var_{n-1} + (x - mu_n)(x - mu_{n-1})) / S
//     takes sigma = sqrt(var_n) and flags a detection when
//       x - mu_n > xi * sigma;
//  4. sets trial d's bit of the detection-flag vector if any of its
//     samples was flagged.
// After the last active trial the flag vector is presented for one cycle
// (flags_valid). The statistics (mean, variance) of every trial and level
// sit in a statistics RAM with a second, read-only monitor port.
//
// M and S are powers of two given as log2 (1..10, i.e. 2..1024); xi is an
// integer 1..32. Mean and sigma carry F fractional bits, the variance 2F;
// the variance saturates at 2^64-1. With `stats_init` high (the very first
// interval) a trial's statistics start from mean = x and variance = 0.
//
// Timing: per trial 1 + J + 22*(2J-1) + 4 = 45J-17 clock cycles, the
// figure the description gives; the square root is computed two result
// bits per cycle (16 cycles), and the other six cycles of a sample read
// the statistics, update mean and variance, compare and write back. The
// split of the 45J-17 cycles is this design's own; the boxcar RAM,
// statistics RAM with monitor port, the filter equations and the
// threshold test follow the description.
module transient_detector
  import tardis_pkg::*;
#(
  parameter int unsigned J = 16,
  parameter int unsigned D = 448,
  parameter int unsigned F = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // control
  input  logic                         start,
  input  logic                         stats_init,
  input  logic [$clog2(D+1)-1:0]       n_trials,
  input  logic [3:0]                   log2m,
  input  logic [3:0]                   log2s,
  input  logic [5:0]                   xi,
  output logic                         busy,
  // accumulator memory read (combinational)
  output logic [$clog2(D)-1:0]         acc_trial,
  output logic [$clog2(J)-1:0]         acc_lane,
  input  logic [ACC_W-1:0]             acc_data,
  // de-dispersed time series to software
  output logic                         ts_valid,
  output logic [$clog2(D)-1:0]         ts_trial,
  output logic [$clog2(J)-1:0]         ts_index,
  output logic [ACC_W-1:0]             ts_data,
  // detection flags to software
  output logic                         flags_valid,
  output logic [D-1:0]                 flags,
  // statistics monitor port
  input  logic [$clog2(D)-1:0]         mon_trial,
  input  logic [$clog2($clog2(J)+1)-1:0] mon_level,
  output logic signed [ACC_W+F:0]      mon_mean,
  output logic [63:0]                  mon_var
);
  localparam int unsigned JW   = $clog2(J);
  localparam int unsigned LEV  = JW + 1;
  localparam int unsigned LW   = $clog2(LEV);
  localparam int unsigned NBC  = 2*J - 1;
  localparam int unsigned BW   = $clog2(NBC);
  localparam int unsigned TRW  = $clog2(D);
  localparam int unsigned MU_W = ACC_W + F + 1;      // signed mean, F frac bits
  localparam int unsigned DF_W = MU_W + 1;           // x - mu
  localparam int unsigned PR_W = 2 * DF_W;           // product, 2F frac bits
  localparam int unsigned VAR_W = 64;                // variance, 2F frac bits
  localparam int unsigned SQ_STEPS = VAR_W / 4;      // 2 root bits per cycle
  localparam int unsigned SUBS = 22;                 // cycles per sample

  typedef enum logic [2:0] {S_IDLE, S_START, S_LOAD, S_SAMP, S_END} state_t;

  typedef struct packed {
    logic signed [MU_W-1:0] mean;
    logic [VAR_W-1:0]       var_;
  } stat_t;

  state_t                 state;
  logic [TRW-1:0]         trial;
  logic [$clog2(D+1)-1:0] ntr;
  logic [JW:0]            load_cnt;
  logic [BW-1:0]          samp;
  logic [4:0]             sub;
  logic [2:0]             end_cnt;
  logic                   init_q;
  logic                   hit_any;
  logic [D-1:0]           flag_acc;

  logic [ACC_W-1:0]       bc [NBC];
  stat_t                  stats [D*LEV];

  logic [ACC_W-1:0]       x_r;
  logic signed [MU_W-1:0] mu_r, mu_n;
  logic [VAR_W-1:0]       var_r, var_n;
  logic signed [DF_W-1:0] dprev, dcur;
  logic signed [PR_W-1:0] prod;
  logic [VAR_W-1:0]       rad;
  logic [VAR_W/2+1:0]     rem;
  logic [VAR_W/2-1:0]     root;

  // boxcar level of sample index `samp`
  logic [LW-1:0]          level;
  always_comb begin
    level = '0;
    for (int l = 1; l < LEV; l++)
      if (int'(samp) >= 2*J - (2*J >> l)) level = LW'(l);
  end

  localparam int unsigned SA_W = $clog2(D*LEV);
  logic [SA_W-1:0] saddr;
  assign saddr = SA_W'(trial) * SA_W'(LEV) + SA_W'(level);

  // x scaled to F fractional bits
  logic signed [DF_W-1:0] xs;
  assign xs = DF_W'({1'b0, x_r, F'(0)});

  // one step of the digit-by-digit square root: remainder r, root q
  typedef struct packed {
    logic [VAR_W/2+1:0] r;
    logic [VAR_W/2-1:0] q;
  } sq_t;

  function automatic sq_t sqrt_step(input logic [1:0] pair, input sq_t s);
    logic [VAR_W/2+1:0] rr, tt;
    sq_t o;
    rr = {s.r[VAR_W/2-1:0], pair};
    tt = {s.q, 2'b01};
    if (rr >= tt) begin
      o.r = rr - tt;
      o.q = {s.q[VAR_W/2-2:0], 1'b1};
    end else begin
      o.r = rr;
      o.q = {s.q[VAR_W/2-2:0], 1'b0};
    end
    return o;
  endfunction

  // variance update, saturating to [0, 2^64-1]
  function automatic logic [VAR_W-1:0] var_update(input logic [VAR_W-1:0] v,
                                                  input logic signed [PR_W-1:0] p,
                                                  input logic [3:0] sh);
    logic signed [PR_W+1:0] delta, nv;
    delta = (PR_W+2)'(p) - (PR_W+2)'(signed'({1'b0, v}));
    nv    = (delta >>> sh) + (PR_W+2)'(signed'({1'b0, v}));
    if (nv < 0) return '0;
    if (nv > (PR_W+2)'(signed'({1'b0, {VAR_W{1'b1}}}))) return '1;
    return nv[VAR_W-1:0];
  endfunction

  assign acc_trial = trial;
  assign acc_lane  = load_cnt[JW-1:0];
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    // boxcar RAM: level-0 load and pair averaging
    if (state == S_LOAD) bc[BW'(load_cnt[JW-1:0])] <= acc_data;
    if (state == S_SAMP && sub == 0 && int'(samp) < J - 1)
      bc[BW'(J) + samp] <= ACC_W'(({1'b0, bc[2*samp]} + {1'b0, bc[2*samp+1]}) >> 1);
    // statistics write-back
    if (state == S_SAMP && sub == 5'(SUBS-1)) stats[saddr] <= '{mean: mu_n, var_: var_n};
  end

  assign mon_mean = stats[SA_W'(mon_trial) * SA_W'(LEV) + SA_W'(mon_level)].mean;
  assign mon_var  = stats[SA_W'(mon_trial) * SA_W'(LEV) + SA_W'(mon_level)].var_;

  // two square-root steps per cycle
  sq_t sq1, sq2;
  always_comb begin
    sq1 = sqrt_step(rad[VAR_W-1 -: 2], '{r: rem, q: root});
    sq2 = sqrt_step(rad[VAR_W-3 -: 2], sq1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      trial       <= '0;
      ntr         <= '0;
      load_cnt    <= '0;
      samp        <= '0;
      sub         <= '0;
      end_cnt     <= '0;
      init_q      <= 1'b0;
      hit_any     <= 1'b0;
      flag_acc    <= '0;
      flags       <= '0;
      flags_valid <= 1'b0;
      ts_valid    <= 1'b0;
      ts_trial    <= '0;
      ts_index    <= '0;
      ts_data     <= '0;
      x_r <= '0; mu_r <= '0; mu_n <= '0; var_r <= '0; var_n <= '0;
      dprev <= '0; dcur <= '0; prod <= '0; rad <= '0; rem <= '0; root <= '0;
    end else begin
      flags_valid <= 1'b0;
      ts_valid    <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          trial    <= '0;
          ntr      <= n_trials;
          init_q   <= stats_init;
          flag_acc <= '0;
          state    <= (n_trials == 0) ? S_END : S_START;
          end_cnt  <= '0;
        end
        S_START: begin
          hit_any  <= 1'b0;
          load_cnt <= '0;
          state    <= S_LOAD;
        end
        S_LOAD: begin
          ts_valid <= 1'b1;
          ts_trial <= trial;
          ts_index <= load_cnt[JW-1:0];
          ts_data  <= acc_data;
          load_cnt <= load_cnt + 1'b1;
          if (load_cnt == (JW+1)'(J-1)) begin
            state <= S_SAMP;
            samp  <= '0;
            sub   <= '0;
          end
        end
        S_SAMP: begin
          sub <= sub + 1'b1;
          case (sub)
            5'd0: begin
              x_r   <= bc[samp];
              mu_r  <= init_q ? MU_W'({1'b0, bc[samp], F'(0)}) : stats[saddr].mean;
              var_r <= init_q ? '0 : stats[saddr].var_;
            end
            5'd1: begin
              dprev <= xs - DF_W'(mu_r);
              mu_n  <= mu_r + MU_W'((xs - DF_W'(mu_r)) >>> log2m);
            end
            5'd2: begin
              dcur <= xs - DF_W'(mu_n);
              prod <= PR_W'(dprev) * PR_W'(xs - DF_W'(mu_n));
            end
            5'd3: begin
              var_n <= var_update(var_r, prod, log2s);
              rad   <= var_update(var_r, prod, log2s);
              rem   <= '0;
              root  <= '0;
            end
            5'd20: begin
              if (dcur > DF_W'(signed'({1'b0, 38'(xi) * 38'(root)}))) hit_any <= 1'b1;
            end
            5'd21: begin
              sub <= '0;
              if (int'(samp) == NBC - 1) begin
                state   <= S_END;
                end_cnt <= '0;
              end else begin
                samp <= samp + 1'b1;
              end
            end
            default: begin   // 4..19: square root, two result bits per cycle
              rem  <= sq2.r;
              root <= sq2.q;
              rad  <= rad << 4;
            end
          endcase
        end
        S_END: begin
          end_cnt <= end_cnt + 1'b1;
          if (end_cnt == 3'd0 && ntr != 0) flag_acc[trial] <= hit_any;
          if (end_cnt == 3'd3) begin
            if (ntr == 0 || 32'(trial) == 32'(ntr) - 1) begin
              flags       <= flag_acc;
              flags_valid <= 1'b1;
              state       <= S_IDLE;
            end else begin
              trial <= trial + 1'b1;
              state <= S_START;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial begin
    assert (SQ_STEPS == 16 && SUBS == 4 + SQ_STEPS + 2) else $error("sample schedule mismatch");
  end
endmodule

// apm: Accelerator Progress Monitor.
// Tracks the accelerator's progress through the current input set and, at
// every epoch boundary (ET cycles), runs the three estimation steps in the
// order of the controller diagram: margin requirement estimation ->
// dynamic bypass threshold estimation -> reuse threshold estimation. The
// resulting reuse thresholds (RI_Th, RC_Th) drive the bypass decisions for
// the whole epoch.
//
// Counters (checkpointed at each epoch boundary):
//   RA  remaining accesses of the input set (M minus completed accesses)
//   RT  remaining cycles to the deadline D (0 once the deadline has passed)
//   MR  core LLC misses / core LLC accesses during the last epoch
//   AMAL as the pair (accelerator accesses completed, summed latency) of
//       the last epoch. The summed latency is obtained by adding the number
//       of outstanding accelerator accesses every cycle (Little's law), so no
//       per-request timestamps are needed.
// Input-set protocol: `set_start` begins an input set (loads RA = M,
// restarts the epoch timer and the deadline counter, re-initialises the
// dynamic thresholds and selects "no bypass" until the first evaluation);
// the set ends when its M-th access completes, and is counted as met or
// missed against D. Epochs are aligned with the start of the input set.
// The new thresholds take effect about 400 cycles after the epoch boundary
// (five 64-cycle divisions plus one 64-cycle division), while the paper
// has the monitor finish before the epoch starts; the epoch-aligned timer,
// the input-set protocol and the latency accounting are this
// implementation's choices.
module apm
  import hydra_pkg::*;
#(
  parameter int unsigned ET              = 200_000,
  parameter int unsigned ALPHA_PCT       = 10,
  parameter int unsigned BETA_PCT        = 5,
  parameter int unsigned MR_TH_PCT       = 30,
  parameter int unsigned MARGIN_HIGH_PCT = 5,
  parameter int unsigned MARGIN_LOW_PCT  = 1,
  parameter int unsigned DELTA_A_PCT     = 20,
  parameter int unsigned DELTA_B_PCT     = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration sent by the accelerator at the start of the application
  input  logic [31:0] cfg_m_total,    // M accesses per input set
  input  logic [31:0] cfg_deadline,   // D in cycles
  // events
  input  logic        set_start,
  input  logic [1:0]  acc_done,       // accelerator accesses completed this cycle (0..2)
  input  logic [7:0]  acc_outstanding,// accelerator accesses in flight
  input  logic        core_access,    // one core LLC lookup
  input  logic        core_miss,      // ... that missed
  // outputs
  output logic        active,         // an input set is in progress
  output reuse_th_t   th,
  output logic        th_update,      // pulses when th changes at an epoch
  output logic [31:0] ra,
  output logic [31:0] elapsed,
  output logic [31:0] sets_met,
  output logic [31:0] sets_missed,
  output logic [31:0] epochs,
  output logic [31:0] ma_i,
  output logic [31:0] ma_global,
  output logic [31:0] ma_hat,
  output logic [2:0]  margin_case,
  output logic [15:0] ta [4],
  output logic [15:0] tb
);
  logic [31:0] ep_cnt;
  logic [31:0] ep_acc, ep_core_acc, ep_core_miss;
  logic [47:0] ep_lat;
  // snapshots for the running evaluation
  logic [31:0] s_ra, s_rt, s_el, s_core_acc, s_core_miss, s_acc;
  logic [47:0] s_lat;
  logic        epoch_end, me_start, me_done, rt_start, rt_done;
  logic [31:0] ma_past;
  reuse_th_t   th_new;
  logic        me_start_q, dt_update;

  assign epoch_end = active && (ep_cnt == 32'(ET - 1));
  assign me_start  = epoch_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; ra <= '0; elapsed <= '0; ep_cnt <= '0;
      ep_acc <= '0; ep_core_acc <= '0; ep_core_miss <= '0; ep_lat <= '0;
      s_ra <= '0; s_rt <= '0; s_el <= '0; s_core_acc <= '0; s_core_miss <= '0;
      s_acc <= '0; s_lat <= '0;
      sets_met <= '0; sets_missed <= '0; epochs <= '0;
    end else begin
      // per-epoch core statistics run whenever the LLC is used
      if (epoch_end) begin
        ep_core_acc  <= 32'(core_access);
        ep_core_miss <= 32'(core_miss);
      end else begin
        ep_core_acc  <= ep_core_acc  + 32'(core_access);
        ep_core_miss <= ep_core_miss + 32'(core_miss);
      end
      if (set_start) begin
        active  <= 1'b1;
        ra      <= cfg_m_total;
        elapsed <= '0;
        ep_cnt  <= '0;
        ep_acc  <= '0;
        ep_lat  <= '0;
      end else if (active) begin
        elapsed <= elapsed + 1'b1;
        ep_cnt  <= epoch_end ? '0 : ep_cnt + 1'b1;
        if (epoch_end) begin
          s_ra        <= ra;
          s_rt        <= (elapsed < cfg_deadline) ? cfg_deadline - elapsed : '0;
          s_el        <= elapsed;
          s_core_acc  <= ep_core_acc;
          s_core_miss <= ep_core_miss;
          s_acc       <= ep_acc + 32'(acc_done);
          s_lat       <= ep_lat + 48'(acc_outstanding);
          ep_acc      <= '0;
          ep_lat      <= '0;
          epochs      <= epochs + 1'b1;
        end else begin
          ep_acc <= ep_acc + 32'(acc_done);
          ep_lat <= ep_lat + 48'(acc_outstanding);
        end
        if (acc_done != 2'd0) begin
          ra <= (32'(acc_done) >= ra) ? '0 : ra - 32'(acc_done);
          if (32'(acc_done) >= ra) begin
            active <= 1'b0;
            if (elapsed < cfg_deadline) sets_met    <= sets_met + 1'b1;
            else                        sets_missed <= sets_missed + 1'b1;
          end
        end
      end
    end
  end

  margin_est #(
    .ET(ET), .ALPHA_PCT(ALPHA_PCT), .BETA_PCT(BETA_PCT), .MR_TH_PCT(MR_TH_PCT),
    .MARGIN_HIGH_PCT(MARGIN_HIGH_PCT), .MARGIN_LOW_PCT(MARGIN_LOW_PCT)
  ) u_margin (
    .clk, .rst_n, .start(me_start_q),
    .m_total(cfg_m_total), .deadline(cfg_deadline),
    .ra(s_ra), .rt(s_rt), .elapsed(s_el),
    .core_acc(s_core_acc), .core_miss(s_core_miss),
    .done(me_done), .ma_i, .ma_global, .ma_past, .margin_case
  );

  // the snapshot registers are loaded on epoch_end; start one cycle later
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      me_start_q <= 1'b0; dt_update <= 1'b0; rt_start <= 1'b0;
    end else begin
      me_start_q <= me_start;
      dt_update  <= me_done;      // thresholds update the cycle after MA(i)
      rt_start   <= dt_update;    // reuse thresholds use the updated T's
    end
  end

  dyn_thresh #(
    .BETA_PCT(BETA_PCT), .DELTA_A_PCT(DELTA_A_PCT), .DELTA_B_PCT(DELTA_B_PCT)
  ) u_dyn (
    .clk, .rst_n, .reinit(set_start), .update(dt_update),
    .ma_i, .ma_global, .ta, .tb
  );

  reuse_thresh #(.ET(ET)) u_reuse (
    .clk, .rst_n, .start(rt_start),
    .acc_cnt(s_acc), .lat_sum(s_lat), .ma_i, .ta, .tb,
    .done(rt_done), .ma_hat, .th(th_new)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      th <= TH_NO_BYPASS; th_update <= 1'b0;
    end else begin
      th_update <= 1'b0;
      if (set_start) th <= TH_NO_BYPASS;
      else if (rt_done) begin
        th        <= th_new;
        th_update <= 1'b1;
      end
    end
  end
endmodule

// rbla_dyn: run-time adaptation of the row caching threshold (RBLA-Dyn).
//
// What it does. During each interval the unit counts the rows migrated from
// PCM to DRAM and the reads and writes served by the DRAM cache. At the end of
// the interval it estimates
//   Cost    = NumMigrations * t_migration
//   Benefit = NumReads_dram  * (t_read,pcm  - t_read,dram)
//           + NumWrites_dram * (t_write,pcm - t_write,dram)
// (latencies are those of a row buffer miss), forms NetBenefit = Benefit - Cost
// and moves MissThresh one step by hill climbing so as to maximise the net
// benefit; then the counts restart.
//
// Hill-climbing rule. The cost/benefit model is the paper's; the step rule is
// delegated there to an earlier publication, so the following rule is this
// design's: if NetBenefit < 0, migrations do not pay, so raise the threshold;
// otherwise, if NetBenefit grew over the previous interval, take another step
// in the same direction as the last one, and if it did not, reverse direction.
// The threshold stays within 0 .. 2^CNT_W-2 so that a saturated miss counter
// can still exceed it.
//
// Static mode: with `adapt_en` low the threshold is frozen at its current
// value (reset value THRESH_INIT), which gives the fixed-threshold RBLA
// policy; net benefit and counts are still reported every interval.
//
// Timing: the event inputs are one-cycle pulses, counted in the cycle they
// occur. On the `interval_tick` cycle the new threshold is computed and it is
// visible on `miss_thresh` from the next cycle; events on the tick cycle count
// towards the next interval. Net benefit and counts of the finished interval
// stay readable on the status outputs.
module rbla_dyn #(
  parameter int unsigned CNT_W       = rbla_pkg::SS_CNT_W,
  parameter int unsigned EV_W        = 24,   // events per interval: 10M cycles fit
  parameter int unsigned VAL_W       = 48,   // signed cycle estimates
  parameter int unsigned T_MIGRATION = rbla_pkg::T_MIGRATION,
  parameter int unsigned T_RD_PCM    = rbla_pkg::PCM_T_MISS,
  parameter int unsigned T_RD_DRAM   = rbla_pkg::DRAM_T_MISS,
  parameter int unsigned T_WR_PCM    = rbla_pkg::PCM_T_WR_MISS,
  parameter int unsigned T_WR_DRAM   = rbla_pkg::DRAM_T_WR_MISS,
  parameter int unsigned THRESH_INIT = rbla_pkg::MISS_THRESH_INIT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    adapt_en,
  input  logic                    interval_tick,
  input  logic                    ev_migration,
  input  logic                    ev_dram_read,
  input  logic                    ev_dram_write,
  output logic [CNT_W-1:0]        miss_thresh,
  // status of the last completed interval
  output logic signed [VAL_W-1:0] last_net_benefit,
  output logic [EV_W-1:0]         last_migrations,
  output logic                    thresh_went_up
);
  localparam logic [CNT_W-1:0] THRESH_MAX = {{(CNT_W-1){1'b1}}, 1'b0};

  logic [EV_W-1:0] n_mig, n_rd, n_wr;
  logic signed [VAL_W-1:0] prev_net;
  logic                    dir_up;     // direction of the last step

  logic signed [VAL_W-1:0] cost, benefit, net;
  logic                    step_up;
  logic [CNT_W-1:0]        next_thresh;

  always_comb begin
    cost    = VAL_W'(n_mig) * VAL_W'(T_MIGRATION);
    benefit = VAL_W'(n_rd) * VAL_W'(T_RD_PCM - T_RD_DRAM)
            + VAL_W'(n_wr) * VAL_W'(T_WR_PCM - T_WR_DRAM);
    net     = benefit - cost;

    if (net < 0)              step_up = 1'b1;
    else if (net > prev_net)  step_up = dir_up;
    else                      step_up = !dir_up;

    if (step_up) next_thresh = (miss_thresh >= THRESH_MAX) ? THRESH_MAX : miss_thresh + 1'b1;
    else         next_thresh = (miss_thresh == '0)         ? '0         : miss_thresh - 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_mig            <= '0;
      n_rd             <= '0;
      n_wr             <= '0;
      prev_net         <= '0;
      dir_up           <= 1'b1;
      miss_thresh      <= CNT_W'(THRESH_INIT);
      last_net_benefit <= '0;
      last_migrations  <= '0;
    end else if (interval_tick) begin
      if (adapt_en) begin
        miss_thresh <= next_thresh;
        dir_up      <= step_up;
      end
      prev_net         <= net;
      last_net_benefit <= net;
      last_migrations  <= n_mig;
      n_mig            <= EV_W'(ev_migration);
      n_rd             <= EV_W'(ev_dram_read);
      n_wr             <= EV_W'(ev_dram_write);
    end else begin
      if (ev_migration  && n_mig != '1) n_mig <= n_mig + 1'b1;
      if (ev_dram_read  && n_rd  != '1) n_rd  <= n_rd  + 1'b1;
      if (ev_dram_write && n_wr  != '1) n_wr  <= n_wr  + 1'b1;
    end
  end

  assign thresh_went_up = dir_up;

  initial assert (T_RD_PCM >= T_RD_DRAM && T_WR_PCM >= T_WR_DRAM && THRESH_INIT <= 2**CNT_W - 2)
    else $error("rbla_dyn: PCM latencies must not be below DRAM latencies");
endmodule

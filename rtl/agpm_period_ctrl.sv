// agpm_period_ctrl: the period-based strategy of AGPM.
//
// A period is a number of PM log updates. The controller counts log updates
// and ends the period when the count exceeds the threshold, or when the
// kernel ends; period_end then flushes the AGPM and reservation buffers and
// makes the path selectors classify. The threshold starts at 10000 (or at
// init_threshold, loaded on kernel_start, for kernels with fewer log
// updates) and is re-tuned at every period end from CWPPR, the average
// number of cycles a PM request waits until it is serviced: if the period
// just ended had a larger CWPPR than the one before, the threshold grows by
// a tenth of itself, otherwise it shrinks by a tenth (10000 -> 11000 or
// 9000).
//
// CWPPR is measured here as (sum over cycles of the PM requests in flight) /
// (PM requests completed), from pm_issue and pm_done pulses; two periods are
// compared by cross-multiplication, wait1*done0 > wait0*done1, so no divider
// is needed. The first period of a kernel has no predecessor and leaves the
// threshold unchanged. These measurement details are this design's choice.
//
// Timing: period_end is combinational (the log update that exceeds the
// threshold, or kernel_end); period_log_cnt is the count including that
// update. The threshold changes at the period_end clock edge.
module agpm_period_ctrl
  import agpm_pkg::*;
#(
  parameter int unsigned INIT_THRESHOLD = 10000,
  parameter int unsigned WAIT_W         = 40
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              kernel_start,
  input  logic              kernel_end,
  input  logic [STAT_W-1:0] init_threshold,
  input  logic              log_update,
  input  logic              pm_issue,
  input  logic              pm_done,
  output logic              period_end,
  output logic [STAT_W-1:0] period_log_cnt,
  output logic [STAT_W-1:0] threshold,
  output logic [15:0]       periods,
  output logic              thr_up,
  output logic              thr_down
);

  logic [STAT_W-1:0] log_cnt_q;
  logic [15:0]       inflight_q;
  logic [WAIT_W-1:0] wait1_q, wait0_q;
  logic [STAT_W-1:0] done1_q, done0_q;
  logic              have_prev_q;

  logic [WAIT_W-1:0] wait1_now;
  logic [STAT_W-1:0] done1_now;
  logic              bigger;

  assign period_log_cnt = log_cnt_q + STAT_W'(log_update);
  assign period_end     = !kernel_start && (kernel_end || (log_update && period_log_cnt > threshold));

  // Statistics of the period including this cycle.
  assign wait1_now = wait1_q + WAIT_W'(inflight_q);
  assign done1_now = done1_q + STAT_W'(pm_done);
  assign bigger    = (wait1_now * done0_q) > (wait0_q * done1_now);

  assign thr_up   = period_end && have_prev_q && bigger;
  assign thr_down = period_end && have_prev_q && !bigger;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      log_cnt_q   <= '0;
      inflight_q  <= '0;
      wait1_q     <= '0;
      wait0_q     <= '0;
      done1_q     <= '0;
      done0_q     <= '0;
      have_prev_q <= 1'b0;
      threshold   <= STAT_W'(INIT_THRESHOLD);
      periods     <= '0;
    end else begin
      inflight_q <= inflight_q + 16'(pm_issue) - 16'(pm_done);
      if (kernel_start) begin
        log_cnt_q   <= '0;
        wait1_q     <= '0;
        wait0_q     <= '0;
        done1_q     <= '0;
        done0_q     <= '0;
        have_prev_q <= 1'b0;
        threshold   <= (init_threshold != '0) ? init_threshold : STAT_W'(INIT_THRESHOLD);
        periods     <= '0;
      end else if (period_end) begin
        log_cnt_q   <= '0;
        wait0_q     <= wait1_now;
        done0_q     <= done1_now;
        wait1_q     <= '0;
        done1_q     <= '0;
        have_prev_q <= !kernel_end;
        periods     <= periods + 1'b1;
        if (thr_up)   threshold <= threshold + threshold / 10;
        if (thr_down) threshold <= threshold - threshold / 10;
      end else begin
        log_cnt_q <= period_log_cnt;
        wait1_q   <= wait1_now;
        done1_q   <= done1_now;
      end
    end
  end

endmodule

// agpm_period_ctrl_tb: checks the period-based strategy. A period must end
// exactly at the log update that takes the count past the threshold (the
// 10001st with the initial threshold of 10000). Each period runs a few PM
// requests of a known service time, so its CWPPR is that time; the
// testbench compares consecutive periods itself and expects +10% when CWPPR
// grew and -10% otherwise (10000 -> 11000 -> 9900 -> 8910), no change after
// the first period of a kernel, a period end on kernel_end, and a smaller
// initial threshold taken from init_threshold at kernel_start.
module agpm_period_ctrl_tb;
  import agpm_pkg::*;

  logic clk = 0, rst_n = 0, kernel_start = 0, kernel_end = 0;
  logic [STAT_W-1:0] init_threshold = 0;
  logic log_update = 0, pm_issue = 0, pm_done = 0;
  logic period_end;
  logic [STAT_W-1:0] period_log_cnt, threshold;
  logic [15:0] periods;
  logic thr_up, thr_down;
  int checks = 0, failures = 0;

  agpm_period_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (thr=%0d)", what, threshold); end
  endtask

  // Run `k` PM requests one after the other, each serviced in `lat` cycles.
  task automatic requests(int k, int lat);
    repeat (k) begin
      @(negedge clk); pm_issue = 1; @(negedge clk); pm_issue = 0;
      repeat (lat - 2) @(negedge clk);
      pm_done = 1; @(negedge clk); pm_done = 0;
    end
  endtask

  // Pump log updates until the period ends; return how many it took.
  task automatic logs_until_end(output int n);
    n = 0;
    forever begin
      @(negedge clk); log_update = 1; n++;
      #1;
      if (period_end) begin
        check("period_log_cnt", period_log_cnt == STAT_W'(n));
        @(negedge clk); log_update = 0;
        break;
      end
    end
  endtask

  int n, prev_cwppr, cur_cwppr, exp_thr;

  task automatic period(int lat, bit first);
    int t_before = int'(threshold);
    requests(5, lat);
    logs_until_end(n);
    check($sformatf("period ended after thr+1 = %0d logs (got %0d)", t_before + 1, n), n == t_before + 1);
    cur_cwppr = lat;
    if (first)                      exp_thr = t_before;
    else if (cur_cwppr > prev_cwppr) exp_thr = t_before + t_before / 10;
    else                            exp_thr = t_before - t_before / 10;
    check($sformatf("threshold %0d expected %0d", threshold, exp_thr), int'(threshold) == exp_thr);
    prev_cwppr = cur_cwppr;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    check("reset threshold", threshold == 10000);
    @(negedge clk); kernel_start = 1; @(negedge clk); kernel_start = 0;
    period(4, 1);
    check("first period unchanged", threshold == 10000);
    period(8, 0);
    check("grew to 11000", threshold == 11000);
    period(2, 0);
    check("shrank to 9900", threshold == 9900);
    period(2, 0);
    check("equal CWPPR shrinks to 8910", threshold == 8910);
    check("periods counted", periods == 4);

    // kernel end closes the period
    repeat (20) begin @(negedge clk); log_update = 1; end
    @(negedge clk); log_update = 0; kernel_end = 1; #1;
    check("kernel_end ends period", period_end == 1 && period_log_cnt == 20);
    @(negedge clk); kernel_end = 0;

    // small kernel: threshold from init_threshold
    init_threshold = 500;
    @(negedge clk); kernel_start = 1; @(negedge clk); kernel_start = 0;
    check("init threshold", threshold == 500 && periods == 0);
    period(3, 1);
    period(6, 0);
    check("550", threshold == 550);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

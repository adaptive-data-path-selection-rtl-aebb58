// agpm_path_selector_tb: checks the per-SM steering. Before any period end
// log updates keep their own path. After a period end whose statistics give
// reason b (strong L1 log locality) temporal log updates turn non-temporal
// and are tagged mark_inc; after one giving reason a non-temporal log
// updates turn temporal and ask for add_clwb. Data requests and clwbs are
// never re-steered. The decision holds between period ends (statistics
// changing mid-period change nothing) and kernel_start forgets it.
module agpm_path_selector_tb;
  import agpm_pkg::*;

  logic clk = 0, rst_n = 0, kernel_start = 0, period_end = 0, shmem = 0;
  stats_t l1, l2;
  logic [STAT_W-1:0] cnt;
  sm_req_t req;
  path_e path;
  logic add_clwb, mark_inc, decided;
  reason_e reason;
  int checks = 0, failures = 0;

  agpm_path_selector dut (
    .clk, .rst_n, .kernel_start, .period_end, .l1_stats(l1), .l2_stats(l2),
    .period_log_cnt(cnt), .shmem_used(shmem), .req, .path, .add_clwb, .mark_inc,
    .decided, .reason
  );

  always #5 clk = ~clk;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Expected steering, worked out from the rule itself.
  task automatic probe(sm_kind_e k, path_e ip, bit dec, path_e dpath, string what);
    path_e ep;
    req.kind = k; req.instr_path = ip;
    #1;
    ep = (k == SM_LOG_STORE && dec) ? dpath : ip;
    check({what, " path"}, path == ep);
    check({what, " add"},  add_clwb == (k == SM_LOG_STORE && ip == PATH_NT && ep == PATH_T));
    check({what, " mark"}, mark_inc == (k == SM_LOG_STORE && ip == PATH_T && ep == PATH_NT));
  endtask

  task automatic all_probes(bit dec, path_e dpath, string what);
    for (int k = 0; k < 3; k++)
      for (int p = 0; p < 2; p++) probe(sm_kind_e'(k), path_e'(p), dec, dpath, what);
  endtask

  task automatic pend();
    @(negedge clk); period_end = 1; @(negedge clk); period_end = 0;
  endtask

  initial begin
    req = '0; l1 = '0; l2 = '0; cnt = 5000;
    repeat (2) @(negedge clk); rst_n = 1;
    all_probes(0, PATH_T, "undecided");
    check("not decided", decided == 0);

    // reason b: ATAX1-like statistics
    l1 = '{t_all: 45460, s_all: 45460, t_log: 45460, s_log: 45460};
    l2 = '{t_all: 135526, s_all: 135526, t_log: 89964, s_log: 89964};
    pend();
    check("reason b", decided && reason == R_B);
    all_probes(1, PATH_NT, "reason b");

    // mid-period change of statistics: no effect
    l1 = '{t_all: 2398, s_all: 3126, t_log: 0, s_log: 0};
    repeat (3) @(negedge clk);
    check("held", reason == R_B);
    all_probes(1, PATH_NT, "held");

    // reason a
    pend();
    check("reason a", reason == R_A);
    all_probes(1, PATH_T, "reason a");

    // shared memory: h
    shmem = 1; pend(); shmem = 0;
    check("reason h", reason == R_H);
    all_probes(1, PATH_NT, "reason h");

    // kernel start forgets
    @(negedge clk); kernel_start = 1; @(negedge clk); kernel_start = 0;
    check("forgotten", decided == 0 && reason == R_NONE);
    all_probes(0, PATH_T, "after kernel start");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

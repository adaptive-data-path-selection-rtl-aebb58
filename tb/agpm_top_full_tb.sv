// agpm_top_full_tb: the AGPM additions at their full size (20 SMs, 512-set
// L1-level and L2-level buffers, 1024-slot reservation buffer, initial
// period of 10000 log updates), taken through two complete periods.
//
// Period 1: every SM walks its own blocks. Each block gets one log update,
// three data updates on the same bytes and, for every eighth block, a
// second log update: the L1 log locality is a small fraction of the total
// (under 0.25), which is reason d. The period must end at exactly the
// 10001st accepted log update, leave the threshold at 10000, and from then
// on non-temporal log updates go temporal with a clwb-like op added.
// Period 2: every SM hammers one block with log updates (reason b) while PM
// requests take longer, so CWPPR grows: the period ends after 10001 log
// updates, the threshold becomes 11000 and temporal log updates now go
// non-temporal.
module agpm_top_full_tb;
  import agpm_pkg::*;

  localparam int unsigned N_SM = 20;

  logic clk = 0, rst_n = 0;
  logic kernel_start = 0, kernel_end = 0, shmem_used = 0;
  logic [STAT_W-1:0] init_threshold = 10000;
  logic [N_SM-1:0] sm_req_valid = '0, sm_req_ready, sm_resp_valid;
  sm_req_t sm_req [N_SM];
  sm_resp_t sm_resp [N_SM];
  logic l1_evict_ready, l2_acc_ready, l2_wb_ready, l2_fill_ready;
  logic pm_issue = 0, pm_done = 0;
  logic period_end;
  logic [STAT_W-1:0] threshold;
  logic [15:0] periods;
  logic thr_up, thr_down;
  reason_e reason;
  logic decided;
  stats_t l1_stats, l2_stats;
  logic [STAT_W-1:0] res_overwrites;

  agpm_top dut (
    .clk, .rst_n, .kernel_start, .kernel_end, .init_threshold, .shmem_used,
    .sm_req_valid, .sm_req_ready, .sm_req, .sm_resp_valid, .sm_resp,
    .l1_evict_valid(1'b0), .l1_evict_ready, .l1_evict_blk('0),
    .l2_acc_valid(1'b0), .l2_acc_ready, .l2_acc_blk('0), .l2_acc_mask('0), .l2_acc_is_log(1'b0),
    .l2_wb_valid(1'b0), .l2_wb_ready, .l2_wb_blk('0),
    .l2_fill_valid(1'b0), .l2_fill_ready, .l2_fill_blk('0),
    .pm_issue, .pm_done, .period_end, .threshold, .periods, .thr_up, .thr_down,
    .reason, .decided, .l1_stats, .l2_stats, .res_overwrites
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Accepted log updates, counted by the testbench.
  int logs_acc = 0, n_ends = 0, logs_at_end [$];
  always @(posedge clk) if (rst_n) begin
    int n;
    n = logs_acc;
    for (int s = 0; s < N_SM; s++)
      if (sm_req_valid[s] && sm_req_ready[s] && sm_req[s].kind == SM_LOG_STORE) n++;
    if (period_end) begin logs_at_end.push_back(n); n = 0; n_ends++; end
    logs_acc = n;
  end

  int pm_lat = 0;
  initial forever begin
    @(negedge clk);
    if (pm_lat > 0) begin
      int l;
      l = pm_lat;
      pm_issue = 1; @(negedge clk); pm_issue = 0;
      repeat (l - 2) @(negedge clk);
      pm_done = 1; @(negedge clk); pm_done = 0;
    end
  end

  task automatic sm_op(int s, sm_kind_e k, path_e ip, blk_addr_t b, byte_mask_t m,
                       output sm_resp_t r);
    @(negedge clk);
    sm_req[s].kind = k; sm_req[s].instr_path = ip; sm_req[s].blk = b; sm_req[s].mask = m;
    sm_req_valid[s] = 1;
    @(posedge clk);
    while (!sm_req_ready[s]) @(posedge clk);
    @(negedge clk); sm_req_valid[s] = 0;
    while (!sm_resp_valid[s]) @(posedge clk);
    r = sm_resp[s];
  endtask

  int n_resp_bad = 0;
  bit stop = 0;

  initial begin
    sm_resp_t r;
    foreach (sm_req[s]) sm_req[s] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); kernel_start = 1; @(negedge clk); kernel_start = 0;
    check("threshold 10000", threshold == 10000);

    // ---- period 1: reason d
    pm_lat = 5;
    stop = 0;
    fork
      for (int s = 0; s < N_SM; s++) begin
        automatic int ss = s;
        fork
          for (int k = 0; !stop; k++) begin
            automatic blk_addr_t b = 57'(ss + N_SM * k);
            sm_resp_t rr;
            sm_op(ss, SM_LOG_STORE, PATH_T, b, 128'hF, rr);
            if (rr.path != PATH_T) n_resp_bad++;
            for (int j = 0; j < 3 && !stop; j++) sm_op(ss, SM_DATA, PATH_T, b, 128'hFF, rr);
            if (k % 8 == 7 && !stop) sm_op(ss, SM_LOG_STORE, PATH_T, b, 128'hF, rr);
          end
        join_none
      end
      begin
        do @(negedge clk); while (n_ends < 1);
        stop = 1;
      end
    join
    wait fork;
    check("period 1 ends at log update 10001", logs_at_end.size() == 1 && logs_at_end[0] == 10001);
    check("undecided paths kept", n_resp_bad == 0);
    check("reason d", decided && reason == R_D);
    check("threshold kept after first period", threshold == 10000);
    for (int s = 0; s < N_SM; s++) begin
      sm_op(s, SM_LOG_STORE, PATH_NT, 57'h10000 + 57'(s), 128'h1, r);
      check("NT log goes temporal", r.path == PATH_T && r.add_clwb);
    end

    // ---- period 2: reason b, longer PM service
    pm_lat = 9;
    stop = 0;
    fork
      for (int s = 0; s < N_SM; s++) begin
        automatic int ss = s;
        fork
          for (int k = 0; !stop; k++) begin
            sm_resp_t rr;
            sm_op(ss, SM_LOG_STORE, PATH_NT, 57'h20000 + 57'(ss), 128'hF, rr);
            if (k % 16 == 0 && !stop) sm_op(ss, SM_DATA, PATH_T, 57'h20000 + 57'(ss), 128'hF, rr);
          end
        join_none
      end
      begin
        do @(negedge clk); while (n_ends < 2);
        stop = 1;
      end
    join
    wait fork;
    check("period 2 ends after 10001 more", logs_at_end.size() == 2 && logs_at_end[1] == 10001);
    check("reason b", decided && reason == R_B);
    check("threshold 11000", threshold == 11000);
    for (int s = 0; s < N_SM; s++) begin
      sm_op(s, SM_LOG_STORE, PATH_T, 57'h30000 + 57'(s), 128'h1, r);
      check("T log goes non-temporal", r.path == PATH_NT && !r.add_clwb);
    end
    check("periods", periods == 2);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

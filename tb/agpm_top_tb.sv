// agpm_top_tb: end-to-end run of the AGPM additions at reduced size (4 SMs,
// 16-set buffers, 32-slot reservation buffer, threshold 200 log updates).
//
// Kernel 1 goes through four periods:
//   1. SM0 re-writes the same log bytes again and again: the log way sees as
//      much locality as the all way (reason b). At the period end temporal
//      log updates must turn non-temporal (mark_inc); the clwb that follows
//      one of them is dropped.
//   2. Each log update hits a fresh block which then takes data updates
//      only (reason a); blocks conflict in the 16 sets, so entries spill
//      from the L1-level buffer into the L2-level buffer. CWPPR is made
//      larger than in period 1: the threshold grows 200 -> 220.
//   3. All four SMs at once (arbitration stalls), plus L1 evictions, L2 hit
//      notifications, L2 write-backs to the reservation buffer and re-fills
//      from it; the kernel uses shared memory (reason h). CWPPR falls: the
//      threshold shrinks 220 -> 198.
//   4. kernel_end closes a short period.
// Every response is checked against the path the period's decision implies,
// every SM must get one response per request, and each mechanism is counted;
// one that never happened is a failure.
module agpm_top_tb;
  import agpm_pkg::*;

  localparam int unsigned N_SM = 4;

  logic clk = 0, rst_n = 0;
  logic kernel_start = 0, kernel_end = 0, shmem_used = 0;
  logic [STAT_W-1:0] init_threshold = 200;
  logic [N_SM-1:0] sm_req_valid = '0, sm_req_ready, sm_resp_valid;
  sm_req_t sm_req [N_SM];
  sm_resp_t sm_resp [N_SM];
  logic l1_evict_valid = 0, l1_evict_ready;
  blk_addr_t l1_evict_blk = '0;
  logic l2_acc_valid = 0, l2_acc_ready;
  blk_addr_t l2_acc_blk = '0;
  byte_mask_t l2_acc_mask = '0;
  logic l2_acc_is_log = 0;
  logic l2_wb_valid = 0, l2_wb_ready;
  blk_addr_t l2_wb_blk = '0;
  logic l2_fill_valid = 0, l2_fill_ready;
  blk_addr_t l2_fill_blk = '0;
  logic pm_issue = 0, pm_done = 0;
  logic period_end;
  logic [STAT_W-1:0] threshold;
  logic [15:0] periods;
  logic thr_up, thr_down;
  reason_e reason;
  logic decided;
  stats_t l1_stats, l2_stats;
  logic [STAT_W-1:0] res_overwrites;

  agpm_top #(.N_SM(N_SM), .SETS(16), .RES_SETS(32), .INIT_THRESHOLD(200)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ------------------------------------------------------------ monitors
  int n_period_thr = 0, n_period_kend = 0, n_up = 0, n_down = 0;
  int n_to_nt = 0, n_to_t = 0, n_drop = 0, n_l1_spill = 0, n_l2_spill = 0;
  int n_res_hit = 0, n_stall = 0, n_l1_evict = 0, n_l2_acc = 0;
  int n_req [N_SM], n_resp [N_SM];
  bit seen_a = 0, seen_b = 0, seen_h = 0;

  always @(posedge clk) if (rst_n) begin
    if (period_end) begin
      if (kernel_end) n_period_kend++; else n_period_thr++;
    end
    if (thr_up) n_up++;
    if (thr_down) n_down++;
    if (dut.l1_spill_valid && dut.l1_spill_ready) n_l1_spill++;
    if (dut.l2_spill_valid) n_l2_spill++;
    if (dut.res_rd_resp_valid && dut.res_rd_hit) n_res_hit++;
    if (l1_evict_valid && l1_evict_ready) n_l1_evict++;
    if (l2_acc_valid && l2_acc_ready) n_l2_acc++;
    for (int s = 0; s < N_SM; s++) begin
      if (sm_req_valid[s] && !sm_req_ready[s]) n_stall++;
      if (sm_req_valid[s] && sm_req_ready[s]) n_req[s]++;
      if (sm_resp_valid[s]) begin
        n_resp[s]++;
        if (sm_resp[s].add_clwb) n_to_t++;
        if (sm_resp[s].drop_clwb) n_drop++;
      end
    end
    if (decided && reason == R_A) seen_a = 1;
    if (decided && reason == R_B) seen_b = 1;
    if (decided && reason == R_H) seen_h = 1;
  end

  // Expected decision: at each period end the selectors take the path of
  // the reason this phase of the test is built to produce.
  path_e phase_path = PATH_T;
  bit    tb_decided = 0;
  path_e tb_dpath   = PATH_T;
  always @(posedge clk) begin
    if (kernel_start) tb_decided <= 0;
    else if (period_end) begin tb_decided <= 1; tb_dpath <= phase_path; end
  end

  // ------------------------------------------------------- PM requests
  int pm_lat = 0;   // 0: none
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

  // ------------------------------------------------------------ drivers
  bit    acc_dec   [N_SM];
  path_e acc_dpath [N_SM];

  task automatic sm_op(int s, sm_kind_e k, path_e ip, blk_addr_t b, byte_mask_t m,
                       output sm_resp_t r);
    @(negedge clk);
    sm_req[s].kind = k; sm_req[s].instr_path = ip; sm_req[s].blk = b; sm_req[s].mask = m;
    sm_req_valid[s] = 1;
    @(posedge clk);
    while (!sm_req_ready[s]) @(posedge clk);
    acc_dec[s]   = tb_decided;   // decision in force when accepted
    acc_dpath[s] = tb_dpath;
    @(negedge clk); sm_req_valid[s] = 0;
    while (!sm_resp_valid[s]) @(posedge clk);
    r = sm_resp[s];
  endtask

  // Checks the steering of one log update against the current decision.
  task automatic log_op(int s, path_e ip, blk_addr_t b, byte_mask_t m);
    sm_resp_t r;
    path_e ep;
    sm_op(s, SM_LOG_STORE, ip, b, m, r);
    ep = acc_dec[s] ? acc_dpath[s] : ip;
    check($sformatf("SM%0d log path", s), r.path == ep);
    check($sformatf("SM%0d add_clwb", s), r.add_clwb == (ip == PATH_NT && ep == PATH_T));
    if (ip == PATH_T && ep == PATH_NT) n_to_nt++;
  endtask

  task automatic data_op(int s, blk_addr_t b, byte_mask_t m);
    sm_resp_t r;
    sm_op(s, SM_DATA, PATH_T, b, m, r);
    check("data keeps path", r.path == PATH_T && !r.add_clwb && !r.drop_clwb);
  endtask

  task automatic pulse_kernel_start();
    @(negedge clk); kernel_start = 1; @(negedge clk); kernel_start = 0;
  endtask

  int pend0;
  sm_resp_t rr;

  initial begin
    foreach (sm_req[s]) sm_req[s] = '0;
    foreach (n_req[s]) begin n_req[s] = 0; n_resp[s] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    pulse_kernel_start();
    check("threshold loaded", threshold == 200);

    // ---- period 1: reason b
    pm_lat = 5;
    phase_path = PATH_NT;
    pend0 = n_period_thr;
    for (int i = 0; i < 400 && n_period_thr == pend0; i++)
      log_op(0, PATH_T, 57'h40, 128'hF);
    check("period 1 ended", n_period_thr == pend0 + 1);
    check("reason b", decided && reason == R_B);
    check("threshold unchanged after first period", threshold == 200);
    check("buffers flushed", l1_stats == '0);
    // temporal log update now goes non-temporal; its clwb is dropped
    log_op(0, PATH_T, 57'h80, 128'hF);
    sm_op(0, SM_CLWB, PATH_T, 57'h80, '0, rr);
    check("clwb dropped", rr.drop_clwb == 1);
    sm_op(0, SM_CLWB, PATH_T, 57'h80, '0, rr);
    check("second clwb kept", rr.drop_clwb == 0);
    log_op(0, PATH_NT, 57'h81, 128'hF);

    // ---- period 2: reason a, L1 -> L2 spills, CWPPR up
    pm_lat = 12;
    phase_path = PATH_T;
    pend0 = n_period_thr;
    for (int i = 0; i < 400 && n_period_thr == pend0; i++) begin
      log_op(1, PATH_T, 57'h100 + 57'(i), 128'hF);
      if (n_period_thr == pend0) data_op(1, 57'h100 + 57'(i), 128'hFF);
    end
    check("period 2 ended", n_period_thr == pend0 + 1);
    check("reason a", decided && reason == R_A);
    check("threshold 220", threshold == 220);
    check("L2 buffer got spilled entries", n_l1_spill > 0);
    log_op(1, PATH_NT, 57'h300, 128'hF);

    // ---- period 3: all SMs, L1/L2 events, reservation, reason h, CWPPR down
    pm_lat = 3;
    shmem_used = 1;
    phase_path = PATH_NT;
    pend0 = n_period_thr;
    fork
      for (int s = 0; s < N_SM; s++) begin
        automatic int ss = s;
        fork
          for (int i = 0; i < 200 && n_period_thr == pend0; i++) begin
            log_op(ss, PATH_T, 57'h400 + 57'(ss * 64 + (i % 32)), 128'h3 << (2 * (i % 8)));
            if (n_period_thr == pend0 && i % 3 == 0)
              data_op(ss, 57'h400 + 57'(ss * 64 + (i % 32)), 128'hFFFF);
          end
        join_none
      end
      begin   // L1 evictions push entries to the L2 buffer, then L2 events
        for (int i = 0; i < 40 && n_period_thr == pend0; i++) begin
          blk_addr_t b;
          b = 57'h400 + 57'((i % N_SM) * 64 + (i % 32));
          @(negedge clk); l1_evict_valid = 1; l1_evict_blk = b;
          @(posedge clk); while (!l1_evict_ready) @(posedge clk);
          @(negedge clk); l1_evict_valid = 0;
          l2_acc_valid = 1; l2_acc_blk = b; l2_acc_mask = 128'hF; l2_acc_is_log = i[0];
          @(posedge clk); while (!l2_acc_ready) @(posedge clk);
          @(negedge clk); l2_acc_valid = 0;
          l2_wb_valid = 1; l2_wb_blk = b;
          @(posedge clk); while (!l2_wb_ready) @(posedge clk);
          @(negedge clk); l2_wb_valid = 0;
          repeat (3) @(negedge clk);
          l2_fill_valid = 1; l2_fill_blk = b;
          @(posedge clk); while (!l2_fill_ready) @(posedge clk);
          @(negedge clk); l2_fill_valid = 0;
          repeat (4) @(negedge clk);
        end
      end
    join
    wait fork;
    check("period 3 ended", n_period_thr == pend0 + 1);
    check("reason h", decided && reason == R_H);
    check("threshold 198", threshold == 198);
    shmem_used = 0;

    // ---- period 4: kernel end
    pm_lat = 0;
    repeat (10) @(negedge clk);
    for (int i = 0; i < 30; i++) log_op(2, PATH_T, 57'h900 + 57'(i), 128'h1);
    @(negedge clk); kernel_end = 1; @(negedge clk); kernel_end = 0;
    check("kernel end closed period", n_period_kend == 1 && periods == 4);
    check("reason e after 30 logs", reason == R_E);
    pulse_kernel_start();
    check("decision forgotten at kernel start", !decided);

    repeat (10) @(negedge clk);
    for (int s = 0; s < N_SM; s++)
      check($sformatf("SM%0d one response per request (%0d/%0d)", s, n_resp[s], n_req[s]),
            n_req[s] == n_resp[s] && n_req[s] > 0);

    $display("mechanisms: periods(thr)=%0d periods(kernel_end)=%0d thr_up=%0d thr_down=%0d",
             n_period_thr, n_period_kend, n_up, n_down);
    $display("  T->NT=%0d NT->T=%0d clwb_drop=%0d l1_spill=%0d l2_spill=%0d res_refill=%0d",
             n_to_nt, n_to_t, n_drop, n_l1_spill, n_l2_spill, n_res_hit);
    $display("  stalls=%0d l1_evict=%0d l2_acc=%0d reasons a/b/h=%0d%0d%0d",
             n_stall, n_l1_evict, n_l2_acc, seen_a, seen_b, seen_h);
    check("mech period by threshold", n_period_thr > 0);
    check("mech period by kernel end", n_period_kend > 0);
    check("mech threshold up", n_up > 0);
    check("mech threshold down", n_down > 0);
    check("mech path T->NT", n_to_nt > 0);
    check("mech path NT->T (clwb-like added)", n_to_t > 0);
    check("mech clwb dropped", n_drop > 0);
    check("mech L1->L2 spill", n_l1_spill > 0);
    check("mech L2->reservation", n_l2_spill > 0);
    check("mech reservation refill", n_res_hit > 0);
    check("mech arbitration stall", n_stall > 0);
    check("mech L1 evict", n_l1_evict > 0);
    check("mech L2 hit notify", n_l2_acc > 0);
    check("mech reasons a b h", seen_a && seen_b && seen_h);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

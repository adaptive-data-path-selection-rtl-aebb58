// agpm_reason_workload_tb: one synthetic access stream per locality pattern,
// run through the whole AGPM datapath (locality buffers -> statistics ->
// classifier -> selector), checking that the period ends on the pattern's
// reason and that the next log update takes the matching path. The streams
// stand in for the benchmark kernel classes; the per-kernel statistics
// themselves are checked against the classifier in agpm_reason_classifier_tb.
//   a  each logged block then takes data updates on the logged bytes
//   b  the same log bytes re-written over and over
//   c  distinct log blocks, evicted from L1 and hit in L2 by log and data
//   d  like a, with every eighth block logged twice
//   e  50 log updates, then the kernel ends
//   f  distinct log blocks only, no re-reference anywhere
//   g  log updates to new bytes of two blocks (spatial locality only)
//   h  stream a in a kernel that uses shared memory
// Reduced size: 2 SMs (one used), 16 sets, period of 201 log updates.
module agpm_reason_workload_tb;
  import agpm_pkg::*;

  localparam int unsigned N_SM = 2;

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
  logic l2_wb_ready, l2_fill_ready;
  logic period_end;
  logic [STAT_W-1:0] threshold;
  logic [15:0] periods;
  logic thr_up, thr_down;
  reason_e reason;
  logic decided;
  stats_t l1_stats, l2_stats;
  logic [STAT_W-1:0] res_overwrites;

  agpm_top #(.N_SM(N_SM), .SETS(16), .RES_SETS(32), .INIT_THRESHOLD(200)) dut (
    .clk, .rst_n, .kernel_start, .kernel_end, .init_threshold, .shmem_used,
    .sm_req_valid, .sm_req_ready, .sm_req, .sm_resp_valid, .sm_resp,
    .l1_evict_valid, .l1_evict_ready, .l1_evict_blk,
    .l2_acc_valid, .l2_acc_ready, .l2_acc_blk, .l2_acc_mask, .l2_acc_is_log,
    .l2_wb_valid(1'b0), .l2_wb_ready, .l2_wb_blk('0),
    .l2_fill_valid(1'b0), .l2_fill_ready, .l2_fill_blk('0),
    .pm_issue(1'b0), .pm_done(1'b0), .period_end, .threshold, .periods, .thr_up, .thr_down,
    .reason, .decided, .l1_stats, .l2_stats, .res_overwrites
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int n_ends = 0;
  always @(posedge clk) if (rst_n && period_end) n_ends++;

  task automatic sm_op(sm_kind_e k, path_e ip, blk_addr_t b, byte_mask_t m, output sm_resp_t r);
    @(negedge clk);
    sm_req[0].kind = k; sm_req[0].instr_path = ip; sm_req[0].blk = b; sm_req[0].mask = m;
    sm_req_valid[0] = 1;
    @(posedge clk);
    while (!sm_req_ready[0]) @(posedge clk);
    @(negedge clk); sm_req_valid[0] = 0;
    while (!sm_resp_valid[0]) @(posedge clk);
    r = sm_resp[0];
  endtask

  task automatic lg(blk_addr_t b, byte_mask_t m);
    sm_resp_t r; sm_op(SM_LOG_STORE, PATH_T, b, m, r);
  endtask
  task automatic dt(blk_addr_t b, byte_mask_t m);
    sm_resp_t r; sm_op(SM_DATA, PATH_T, b, m, r);
  endtask
  task automatic evict(blk_addr_t b);
    @(negedge clk); l1_evict_valid = 1; l1_evict_blk = b;
    @(posedge clk); while (!l1_evict_ready) @(posedge clk);
    @(negedge clk); l1_evict_valid = 0;
  endtask
  task automatic l2hit(blk_addr_t b, byte_mask_t m, bit is_log);
    @(negedge clk); l2_acc_valid = 1; l2_acc_blk = b; l2_acc_mask = m; l2_acc_is_log = is_log;
    @(posedge clk); while (!l2_acc_ready) @(posedge clk);
    @(negedge clk); l2_acc_valid = 0;
  endtask

  task automatic new_kernel(bit shm);
    @(negedge clk); shmem_used = shm; kernel_start = 1; @(negedge clk); kernel_start = 0;
  endtask

  // After the period: decision and steering of a fresh temporal log update.
  task automatic expect_reason(reason_e r, string name);
    sm_resp_t rr;
    path_e ep;
    ep = (r == R_A || r == R_C || r == R_D || r == R_G) ? PATH_T : PATH_NT;
    check($sformatf("%s: reason %0d", name, reason), decided && reason == r);
    sm_op(SM_LOG_STORE, PATH_T, 57'h7fff, 128'h1, rr);
    check($sformatf("%s: path", name), rr.path == ep);
  endtask

  int e0;
  initial begin
    foreach (sm_req[s]) sm_req[s] = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    new_kernel(0); e0 = n_ends;   // a
    for (int i = 0; n_ends == e0; i++) begin lg(57'(i), 128'hF); if (n_ends == e0) dt(57'(i), 128'hFF); end
    expect_reason(R_A, "a");

    new_kernel(0); e0 = n_ends;   // b
    for (int i = 0; n_ends == e0; i++) begin lg(57'h55, 128'hF); if (i % 8 == 0 && n_ends == e0) dt(57'h55, 128'hF); end
    expect_reason(R_B, "b");

    new_kernel(0); e0 = n_ends;   // c
    for (int i = 0; n_ends == e0; i++) begin
      lg(57'h1000 + 57'(i), 128'hF);
      if (n_ends == e0) begin
        evict(57'h1000 + 57'(i));
        l2hit(57'h1000 + 57'(i), 128'hF, 1);
        l2hit(57'h1000 + 57'(i), 128'hF, 0);
      end
    end
    expect_reason(R_C, "c");

    new_kernel(0); e0 = n_ends;   // d
    for (int i = 0; n_ends == e0; i++) begin
      lg(57'h2000 + 57'(i), 128'hF);
      for (int j = 0; j < 3 && n_ends == e0; j++) dt(57'h2000 + 57'(i), 128'hFF);
      if (i % 8 == 7 && n_ends == e0) lg(57'h2000 + 57'(i), 128'hF);
    end
    expect_reason(R_D, "d");

    new_kernel(0); e0 = n_ends;   // e
    for (int i = 0; i < 50; i++) begin lg(57'(i), 128'hF); dt(57'(i), 128'hFF); end
    @(negedge clk); kernel_end = 1; @(negedge clk); kernel_end = 0;
    check("e: kernel end closed the period", n_ends == e0 + 1);
    expect_reason(R_E, "e");

    new_kernel(0); e0 = n_ends;   // f
    for (int i = 0; n_ends == e0; i++) lg(57'h3000 + 57'(i), 128'hF);
    expect_reason(R_F, "f");

    new_kernel(0); e0 = n_ends;   // g
    for (int i = 0; n_ends == e0; i++) begin
      lg(57'h4000 + 57'(i % 2), 128'h1 << ((i / 2) % 128));
      if (n_ends == e0 && i % 4 == 0) dt(57'h4000, 128'h1 << (127 - (i / 4) % 16));
    end
    expect_reason(R_G, "g");

    new_kernel(1); e0 = n_ends;   // h
    for (int i = 0; n_ends == e0; i++) begin lg(57'(i), 128'hF); if (n_ends == e0) dt(57'(i), 128'hFF); end
    expect_reason(R_H, "h");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

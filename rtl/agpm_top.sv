// agpm_top: the AGPM additions to a GPU memory hierarchy, wired as in the
// architecture overview: a path selector in every SM, one L1-level AGPM
// buffer (the paper argues one buffer suffices for all SMs, since their
// access patterns are alike), one AGPM buffer shared by the L2 partitions,
// the reservation buffer next to the NVM and the period controller.
//
// The GPU itself (SIMD cores, L1D and L2 caches, interconnect, page-table
// walkers, memory controllers, NVMC and memories) is not part of this RTL;
// its events enter as ports:
//   sm_req_*    per SM: PM log updates, other requests that hit in L1D, and
//               clwbs. Each is answered on sm_resp_* with the selected path,
//               add_clwb (insert a clwb-like op) and drop_clwb.
//   l1_evict_*  a block leaves L1D: its AGPM entry moves to the L2 buffer.
//   l2_acc_*    a request hits in L2 (log update or not): counted in L2.
//   l2_wb_*     L2 writes a block back to NVM: its entry moves to the
//               reservation buffer.
//   l2_fill_*   L2 fetches a block from NVM: a reserved entry comes back.
//   pm_issue/pm_done  PM requests entering and leaving service (CWPPR).
// All request ports are valid/ready handshakes.
//
// Routing inside: the L1 buffer serves l1_evict before the SMs (round
// robin among SMs); its conflict spills install into the L2 buffer. The L2
// buffer serves, in order, L1 spills, re-fills from the reservation buffer,
// write-backs and L2 hits; its spills go to the reservation buffer. A
// period end clears all three stores in the same cycle in which every
// selector classifies the statistics. The priorities and the single
// outstanding L1 operation are this design's choices.
//
// Timing: an SM request is accepted when the L1 buffer is idle; its
// response comes two cycles after acceptance. Each buffer takes one
// operation every two cycles.
module agpm_top
  import agpm_pkg::*;
#(
  parameter int unsigned N_SM           = 20,
  parameter int unsigned SETS           = 512,
  parameter int unsigned RES_SETS       = 1024,
  parameter int unsigned INIT_THRESHOLD = 10000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              kernel_start,
  input  logic              kernel_end,
  input  logic [STAT_W-1:0] init_threshold,
  input  logic              shmem_used,
  input  logic [N_SM-1:0]   sm_req_valid,
  output logic [N_SM-1:0]   sm_req_ready,
  input  sm_req_t           sm_req [N_SM],
  output logic [N_SM-1:0]   sm_resp_valid,
  output sm_resp_t          sm_resp [N_SM],
  input  logic              l1_evict_valid,
  output logic              l1_evict_ready,
  input  blk_addr_t         l1_evict_blk,
  input  logic              l2_acc_valid,
  output logic              l2_acc_ready,
  input  blk_addr_t         l2_acc_blk,
  input  byte_mask_t        l2_acc_mask,
  input  logic              l2_acc_is_log,
  input  logic              l2_wb_valid,
  output logic              l2_wb_ready,
  input  blk_addr_t         l2_wb_blk,
  input  logic              l2_fill_valid,
  output logic              l2_fill_ready,
  input  blk_addr_t         l2_fill_blk,
  input  logic              pm_issue,
  input  logic              pm_done,
  output logic              period_end,
  output logic [STAT_W-1:0] threshold,
  output logic [15:0]       periods,
  output logic              thr_up,
  output logic              thr_down,
  output reason_e           reason,
  output logic              decided,
  output stats_t            l1_stats,
  output stats_t            l2_stats,
  output logic [STAT_W-1:0] res_overwrites
);

  localparam int unsigned IW = $clog2(N_SM > 1 ? N_SM : 2);

  // ---------------------------------------------------------------- period
  logic              log_update;
  logic [STAT_W-1:0] period_log_cnt;

  agpm_period_ctrl #(.INIT_THRESHOLD(INIT_THRESHOLD)) u_period (
    .clk, .rst_n, .kernel_start, .kernel_end, .init_threshold,
    .log_update, .pm_issue, .pm_done,
    .period_end, .period_log_cnt, .threshold, .periods, .thr_up, .thr_down
  );

  // ------------------------------------------------------------- selectors
  path_e     sel_path     [N_SM];
  logic      sel_add_clwb [N_SM];
  logic      sel_mark_inc [N_SM];
  logic      sel_decided  [N_SM];
  reason_e   sel_reason   [N_SM];

  for (genvar s = 0; s < N_SM; s++) begin : g_sm
    agpm_path_selector u_sel (
      .clk, .rst_n, .kernel_start, .period_end,
      .l1_stats, .l2_stats, .period_log_cnt, .shmem_used,
      .req      (sm_req[s]),
      .path     (sel_path[s]),
      .add_clwb (sel_add_clwb[s]),
      .mark_inc (sel_mark_inc[s]),
      .decided  (sel_decided[s]),
      .reason   (sel_reason[s])
    );
  end
  assign reason  = sel_reason[0];
  assign decided = sel_decided[0];

  // ------------------------------------------------------------ L1 buffer
  logic [N_SM-1:0] grant;
  logic [IW-1:0]   gidx;
  logic            sm_any;
  logic            l1_req_valid, l1_req_ready, l1_resp_valid;
  buf_req_t        l1_req;
  buf_resp_t       l1_resp;
  logic            l1_spill_valid, l1_spill_ready;
  entry_t          l1_spill_entry;
  logic            sm_take;
  sm_req_t         g_req;

  assign g_req = sm_req[gidx];

  agpm_rr_arbiter #(.N(N_SM)) u_arb (
    .clk, .rst_n, .valid(sm_req_valid), .advance(sm_take),
    .grant, .grant_idx(gidx), .any(sm_any)
  );

  always_comb begin
    l1_req          = '0;
    l1_req_valid    = 1'b0;
    l1_evict_ready  = 1'b0;
    sm_take         = 1'b0;
    if (l1_evict_valid) begin
      l1_req.op      = OP_EVICT;
      l1_req.blk     = l1_evict_blk;
      l1_req_valid   = 1'b1;
      l1_evict_ready = l1_req_ready;
    end else if (sm_any) begin
      l1_req.op       = (g_req.kind == SM_CLWB) ? OP_CLWB : OP_ACCESS;
      l1_req.blk      = g_req.blk;
      l1_req.mask     = g_req.mask;
      l1_req.is_log   = (g_req.kind == SM_LOG_STORE);
      l1_req.mark_inc = sel_mark_inc[gidx];
      l1_req.id       = SM_ID_W'(gidx);
      l1_req_valid    = 1'b1;
      sm_take         = l1_req_ready;
    end
  end

  assign sm_req_ready = sm_take ? grant : '0;
  assign log_update   = sm_take && (g_req.kind == SM_LOG_STORE);

  agpm_buffer #(.SETS(SETS)) u_l1buf (
    .clk, .rst_n, .clear(period_end),
    .req_valid(l1_req_valid), .req_ready(l1_req_ready), .req(l1_req),
    .resp_valid(l1_resp_valid), .resp(l1_resp),
    .spill_valid(l1_spill_valid), .spill_ready(l1_spill_ready), .spill_entry(l1_spill_entry),
    .stats(l1_stats)
  );

  // Path decision of the request in flight, returned with the response.
  logic     pend_sm_q;
  path_e    pend_path_q;
  logic     pend_add_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_sm_q   <= 1'b0;
      pend_path_q <= PATH_T;
      pend_add_q  <= 1'b0;
    end else if (l1_req_valid && l1_req_ready) begin
      pend_sm_q   <= sm_take;
      pend_path_q <= sel_path[gidx];
      pend_add_q  <= sel_add_clwb[gidx];
    end
  end

  always_comb begin
    for (int s = 0; s < N_SM; s++) begin
      sm_resp_valid[s]     = l1_resp_valid && pend_sm_q && (32'(l1_resp.id) == s);
      sm_resp[s].path      = pend_path_q;
      sm_resp[s].add_clwb  = pend_add_q;
      sm_resp[s].drop_clwb = l1_resp.drop_clwb;
      sm_resp[s].hit       = l1_resp.hit;
    end
  end

  // ------------------------------------------------------ reservation/fill
  typedef enum logic [1:0] {F_IDLE, F_WAIT, F_INST} fill_e;
  fill_e   fstate_q;
  entry_t  fill_entry_q;
  logic    res_rd_resp_valid, res_rd_hit;
  entry_t  res_rd_entry;
  logic    l2_spill_valid;
  entry_t  l2_spill_entry;

  assign l2_fill_ready = (fstate_q == F_IDLE);

  agpm_reservation_buffer #(.RES_SETS(RES_SETS)) u_res (
    .clk, .rst_n, .clear(period_end),
    .wr_valid(l2_spill_valid), .wr_entry(l2_spill_entry),
    .rd_valid(l2_fill_valid && l2_fill_ready), .rd_blk(l2_fill_blk),
    .rd_resp_valid(res_rd_resp_valid), .rd_hit(res_rd_hit), .rd_entry(res_rd_entry),
    .overwrites(res_overwrites)
  );

  // ------------------------------------------------------------ L2 buffer
  logic      l2_req_valid, l2_req_ready, l2_resp_valid;
  buf_req_t  l2_req;
  buf_resp_t l2_resp;
  logic      fill_take;

  always_comb begin
    l2_req         = '0;
    l2_req_valid   = 1'b0;
    l1_spill_ready = 1'b0;
    fill_take      = 1'b0;
    l2_wb_ready    = 1'b0;
    l2_acc_ready   = 1'b0;
    if (l1_spill_valid) begin
      l2_req.op      = OP_INSTALL;
      l2_req.blk     = l1_spill_entry.all_w.tag;
      l2_req.entry   = l1_spill_entry;
      l2_req_valid   = 1'b1;
      l1_spill_ready = l2_req_ready;
    end else if (fstate_q == F_INST) begin
      l2_req.op    = OP_INSTALL;
      l2_req.blk   = fill_entry_q.all_w.tag;
      l2_req.entry = fill_entry_q;
      l2_req_valid = 1'b1;
      fill_take    = l2_req_ready;
    end else if (l2_wb_valid) begin
      l2_req.op    = OP_EVICT;
      l2_req.blk   = l2_wb_blk;
      l2_req_valid = 1'b1;
      l2_wb_ready  = l2_req_ready;
    end else if (l2_acc_valid) begin
      l2_req.op     = OP_ACCESS;
      l2_req.blk    = l2_acc_blk;
      l2_req.mask   = l2_acc_mask;
      l2_req.is_log = l2_acc_is_log;
      l2_req_valid  = 1'b1;
      l2_acc_ready  = l2_req_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fstate_q     <= F_IDLE;
      fill_entry_q <= '0;
    end else begin
      unique case (fstate_q)
        F_IDLE: if (l2_fill_valid) fstate_q <= F_WAIT;
        F_WAIT: if (res_rd_resp_valid) begin
          if (res_rd_hit) begin
            fill_entry_q <= res_rd_entry;
            fstate_q     <= F_INST;
          end else begin
            fstate_q     <= F_IDLE;
          end
        end
        F_INST: if (fill_take) fstate_q <= F_IDLE;
        default: fstate_q <= F_IDLE;
      endcase
      // A period end flushes the reserved entry in transit as well.
      if (period_end && fstate_q == F_INST && !fill_take) fstate_q <= F_IDLE;
    end
  end

  agpm_buffer #(.SETS(SETS)) u_l2buf (
    .clk, .rst_n, .clear(period_end),
    .req_valid(l2_req_valid), .req_ready(l2_req_ready), .req(l2_req),
    .resp_valid(l2_resp_valid), .resp(l2_resp),
    .spill_valid(l2_spill_valid), .spill_ready(1'b1), .spill_entry(l2_spill_entry),
    .stats(l2_stats)
  );

endmodule

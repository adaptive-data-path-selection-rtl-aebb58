// agpm_path_selector: the path selector that sits in each SM between the
// SIMD core's LD/ST unit and the L1D cache.
//
// At every period end it classifies the statistics of the L1-level and
// L2-level AGPM buffers (agpm_reason_classifier) and keeps the reason and
// path until the next period end. During the period each PM log update is
// steered to the kept path:
//   * instruction temporal, kept path non-temporal: the store goes to the
//     NVMC write-pending queue and its later clwb must be dropped, so the
//     request is tagged mark_inc (the AGPM buffer remembers it in the mark);
//   * instruction non-temporal, kept path temporal: the store goes through
//     the caches and add_clwb asks for a clwb-like operation after it.
// Requests that are not log updates keep their own path. Until the first
// period of a kernel has ended there is no decision, and log updates keep
// the path the instruction encodes (this design's choice; the paper does
// not say what the first period uses). kernel_start forgets the decision.
//
// Timing: the steering outputs are combinational in the request; the
// decision register loads on the period_end cycle.
module agpm_path_selector
  import agpm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              kernel_start,
  input  logic              period_end,
  input  stats_t            l1_stats,
  input  stats_t            l2_stats,
  input  logic [STAT_W-1:0] period_log_cnt,
  input  logic              shmem_used,
  input  sm_req_t           req,
  output path_e             path,
  output logic              add_clwb,
  output logic              mark_inc,
  output logic              decided,
  output reason_e           reason
);

  reason_e cls_reason;
  path_e   cls_path;
  path_e   path_q;

  agpm_reason_classifier u_cls (
    .l1         (l1_stats),
    .l2         (l2_stats),
    .log_cnt    (period_log_cnt),
    .shmem_used (shmem_used),
    .reason     (cls_reason),
    .path       (cls_path)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      decided <= 1'b0;
      reason  <= R_NONE;
      path_q  <= PATH_T;
    end else if (kernel_start) begin
      decided <= 1'b0;
      reason  <= R_NONE;
      path_q  <= PATH_T;
    end else if (period_end) begin
      decided <= 1'b1;
      reason  <= cls_reason;
      path_q  <= cls_path;
    end
  end

  logic is_log;
  assign is_log   = (req.kind == SM_LOG_STORE);
  assign path     = (is_log && decided) ? path_q : req.instr_path;
  assign add_clwb = is_log && (req.instr_path == PATH_NT) && (path == PATH_T);
  assign mark_inc = is_log && (req.instr_path == PATH_T)  && (path == PATH_NT);

endmodule

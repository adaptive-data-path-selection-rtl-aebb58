// agpm_reason_classifier: statistics-based reasoning of AGPM.
//
// Matches the locality statistics of the L1-level and L2-level AGPM buffers,
// the number of log updates of the period and the kernel's shared-memory
// use against the eight reasons a..h and names the data path for PM log
// updates. The reasons are the paper's:
//   a  l1 t_all!=0, s_all!=0, t_log==0, s_log==0                 -> temporal
//   b  l1 all four !=0 and t_log/t_all > 0.25 and s_log/s_all > 0.25 -> non-temporal
//   c  l1 all four ==0, l2 all four !=0                          -> temporal
//   d  l1 all four !=0 and both ratios <= 0.25                   -> temporal
//   e  log updates <= 100                                        -> non-temporal
//   f  l1 and l2 all eight ==0                                   -> non-temporal
//   g  l1 t_all==0, s_all!=0, t_log==0, s_log!=0                 -> temporal
//   h  shared memory used                                        -> non-temporal
// h and then e are checked first (they are the special cases; the paper's
// kernels BFS and SSSP1 match a or f as well as e). The ratio tests are made
// without division, as 4*log > all. A state that matches no reason (e.g. one
// ratio above and one below 0.25) gives R_NONE and the non-temporal path,
// which the paper recommends when no locality argues for the caches.
//
// Purely combinational.
module agpm_reason_classifier
  import agpm_pkg::*;
(
  input  stats_t            l1,
  input  stats_t            l2,
  input  logic [STAT_W-1:0] log_cnt,
  input  logic              shmem_used,
  output reason_e           reason,
  output path_e             path
);

  localparam logic [STAT_W-1:0] FEW_LOGS = STAT_W'(100);

  logic l1_all_nz, l1_all_z, l1_log_nz, l1_log_z, l2_nz, l2_z;
  logic ratio_hi, ratio_lo;

  always_comb begin
    l1_all_nz = (l1.t_all != '0) && (l1.s_all != '0);
    l1_all_z  = (l1.t_all == '0) && (l1.s_all == '0);
    l1_log_nz = (l1.t_log != '0) && (l1.s_log != '0);
    l1_log_z  = (l1.t_log == '0) && (l1.s_log == '0);
    l2_nz     = (l2.t_all != '0) && (l2.s_all != '0) && (l2.t_log != '0) && (l2.s_log != '0);
    l2_z      = (l2.t_all == '0) && (l2.s_all == '0) && (l2.t_log == '0) && (l2.s_log == '0);
    ratio_hi  = ({l1.t_log, 2'b00} > {2'b00, l1.t_all}) && ({l1.s_log, 2'b00} > {2'b00, l1.s_all});
    ratio_lo  = ({l1.t_log, 2'b00} <= {2'b00, l1.t_all}) && ({l1.s_log, 2'b00} <= {2'b00, l1.s_all});

    if (shmem_used)                                       reason = R_H;
    else if (log_cnt <= FEW_LOGS)                         reason = R_E;
    else if (l1_all_nz && l1_log_z)                       reason = R_A;
    else if (l1_all_nz && l1_log_nz && ratio_hi)          reason = R_B;
    else if (l1_all_nz && l1_log_nz && ratio_lo)          reason = R_D;
    else if (l1_all_z && l1_log_z && l2_nz)               reason = R_C;
    else if (l1_all_z && l1_log_z && l2_z)                reason = R_F;
    else if (l1.t_all == '0 && l1.s_all != '0 && l1.t_log == '0 && l1.s_log != '0)
                                                          reason = R_G;
    else                                                  reason = R_NONE;

    unique case (reason)
      R_A, R_C, R_D, R_G: path = PATH_T;
      default:            path = PATH_NT;
    endcase
  end

endmodule

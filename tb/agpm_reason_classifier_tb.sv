// agpm_reason_classifier_tb: feeds the per-kernel locality statistics of the
// 22 benchmark kernels (L1D and L2 temporal/spatial counts for all and log
// updates, number of log updates) to the classifier and checks the reason
// the kernel was assigned and the path that reason implies. SGEMM and NW are
// the two kernels that use shared memory. Directed cases then probe the
// edges: log count 100/101, a ratio of exactly 0.25, and a state matching no
// reason.
module agpm_reason_classifier_tb;
  import agpm_pkg::*;

  stats_t            l1, l2;
  logic [STAT_W-1:0] log_cnt;
  logic              shmem;
  reason_e           reason;
  path_e             path;
  int checks = 0, failures = 0;

  agpm_reason_classifier dut (.l1, .l2, .log_cnt, .shmem_used(shmem), .reason, .path);

  typedef struct {
    string name;
    int unsigned v [10];  // l1 t_all t_log s_all s_log, l2 t_all t_log s_all s_log, all, log
    bit shm;
    reason_e r;
  } row_t;

  row_t rows [22];

  function automatic path_e exp_path(reason_e r);
    return (r == R_A || r == R_C || r == R_D || r == R_G) ? PATH_T : PATH_NT;
  endfunction

  task automatic apply(int unsigned v [10], bit shm, reason_e r, string name);
    l1.t_all = v[0]; l1.t_log = v[1]; l1.s_all = v[2]; l1.s_log = v[3];
    l2.t_all = v[4]; l2.t_log = v[5]; l2.s_all = v[6]; l2.s_log = v[7];
    log_cnt  = v[9];
    shmem    = shm;
    #1;
    checks++;
    if (reason !== r || path !== exp_path(r)) begin
      failures++;
      $display("FAIL %s: reason %0d path %0d, expected %0d/%0d", name, reason, path, r, exp_path(r));
    end
  endtask

  initial begin
    rows[0]  = '{"SAD1",        '{0,0,0,0,289160,157652,300509,167001,2288857,324803}, 0, R_C};
    rows[1]  = '{"Stencil1",    '{0,0,0,0,0,0,0,0,131871,33849}, 0, R_F};
    rows[2]  = '{"SGEMM",       '{0,0,0,0,0,0,0,0,3191435,133274}, 1, R_H};
    rows[3]  = '{"GRID1",       '{2398,0,3126,0,7495,3483,9588,3930,1047435,662069}, 0, R_A};
    rows[4]  = '{"GRID2",       '{47898,0,47898,0,140745,64156,140745,64156,591011,200163}, 0, R_A};
    rows[5]  = '{"2DCONV",      '{0,0,0,0,0,0,0,0,79334,17060}, 0, R_F};
    rows[6]  = '{"Backprop1",   '{0,0,7,6,0,0,153,147,88412,65076}, 0, R_G};
    rows[7]  = '{"Backprop2",   '{8764,2671,9476,2987,8958,6330,9707,6920,280763,118159}, 0, R_B};
    rows[8]  = '{"Pathfinder",  '{1221,97,1225,101,35000,26646,35843,27229,806640,382582}, 0, R_D};
    rows[9]  = '{"StreamTriad", '{0,0,0,0,0,0,0,0,36000,17476}, 0, R_F};
    rows[10] = '{"RA",          '{1,1,2,2,2,1,4,2,6644,2676}, 0, R_B};
    rows[11] = '{"ATAX1",       '{45460,45460,45460,45460,135526,89964,135526,89964,1926411,180170}, 0, R_B};
    rows[12] = '{"ATAX2",       '{89032,45562,134032,45562,135770,90000,135770,90000,545022,180170}, 0, R_B};
    rows[13] = '{"NW",          '{82,40,154,84,204,88,426,156,3195,1392}, 1, R_H};
    rows[14] = '{"BFS",         '{5,0,5,0,2,1,2,1,9528,79}, 0, R_E};
    rows[15] = '{"SSSP1",       '{0,0,0,0,1,0,1,0,1007,17}, 0, R_E};
    rows[16] = '{"SSSP2",       '{1028,771,1028,771,2570,1285,2570,1285,9509,6168}, 0, R_B};
    rows[17] = '{"MVT",         '{63720,63720,63720,63720,196227,130846,196227,130846,9444863,341037}, 0, R_B};
    rows[18] = '{"GESUMMV",     '{60929,60929,60929,60929,193639,129104,193639,129104,15752038,281725}, 0, R_B};
    rows[19] = '{"2MM1",        '{1639464,0,2809772,0,5608094,4905025,6369854,5416431,95599514,51796409}, 0, R_A};
    rows[20] = '{"3MM1",        '{28360,0,28608,0,441916,411072,449205,418361,7281497,4458165}, 0, R_A};
    rows[21] = '{"GEMM",        '{33545,2031,34045,2031,1533475,1501161,1559512,1527197,7332760,4503201}, 0, R_D};
    foreach (rows[i]) apply(rows[i].v, rows[i].shm, rows[i].r, rows[i].name);

    // Edges.
    apply('{5,0,5,0,2,1,2,1,9528,100}, 0, R_E,    "log=100");
    apply('{5,0,5,0,2,1,2,1,9528,101}, 0, R_A,    "log=101");
    apply('{400,100,400,100,0,0,0,0,0,5000}, 0, R_D, "ratio=0.25");
    apply('{400,101,400,101,0,0,0,0,0,5000}, 0, R_B, "ratio>0.25");
    apply('{400,200,400,50,0,0,0,0,0,5000},  0, R_NONE, "mixed ratios");
    apply('{0,0,0,0,5,0,5,3,0,5000},         0, R_NONE, "l2 partial");
    apply('{0,0,0,0,0,0,0,0,0,50},           1, R_H,    "shmem before e");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

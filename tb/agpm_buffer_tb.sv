// agpm_buffer_tb: checks the AGPM buffer against a reference model kept in
// the testbench.
//
// Part 1 is a directed walk through the counting rules (log update
// allocates with counters at 1, a non-log hit bumps the all way only, a log
// hit bumps both, bytes at 0 only bump the block counter, misses of non-log
// requests are ignored, saturation at 31) with hand-computed statistics, and
// checks the two-cycle request-to-response latency. Part 2 runs random
// accesses, evictions, installs and clwbs over a small set of block
// addresses on an 8-set buffer, with random back-pressure on the spill
// port, and compares hit, drop_clwb, spilled entries and the four
// statistics with the model after every operation. Part 3 checks that clear
// empties the buffer and zeroes the statistics.
module agpm_buffer_tb;
  import agpm_pkg::*;

  localparam int unsigned SETS = 8;

  logic clk = 0, rst_n = 0, clear = 0;
  logic req_valid = 0, req_ready;
  buf_req_t req;
  logic resp_valid;
  buf_resp_t resp;
  logic spill_valid, spill_ready = 1;
  entry_t spill_entry;
  stats_t stats;
  int checks = 0, failures = 0;
  longint cycle = 0;

  agpm_buffer #(.SETS(SETS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- reference model
  entry_t m_mem [SETS];
  bit     m_v   [SETS];
  longint m_t_all, m_b_all, m_t_log, m_b_log;
  entry_t exp_spill [$];

  function automatic int idx(blk_addr_t b); return int'(b % SETS); endfunction

  function automatic way_t m_bump(way_t w, byte_mask_t m, inout longint t, inout longint b);
    for (int i = 0; i < BLK_BYTES; i++)
      if (m[i] && w.byte_cnt[i] > 0 && w.byte_cnt[i] < 31) begin
        t += (w.byte_cnt[i] == 1) ? 2 : 1;
        w.byte_cnt[i]++;
      end
    if (w.blk_cnt < 31) begin w.blk_cnt++; b++; end
    return w;
  endfunction

  function automatic int sat(int a, int b); return (a + b > 31) ? 31 : a + b; endfunction

  // Returns expected {hit, drop}.
  function automatic logic [1:0] m_apply(buf_req_t r);
    int  k   = idx(r.blk);
    bit  hit = m_v[k] && m_mem[k].all_w.tag == r.blk;
    bit  drop = 0;
    way_t f;
    case (r.op)
      OP_ACCESS: begin
        if (hit) begin
          m_mem[k].all_w = m_bump(m_mem[k].all_w, r.mask, m_t_all, m_b_all);
          if (r.is_log) begin
            m_mem[k].log_w = m_bump(m_mem[k].log_w, r.mask, m_t_log, m_b_log);
            if (r.mark_inc) m_mem[k].log_w.mark = CNT_W'(sat(m_mem[k].log_w.mark, 1));
          end
        end else if (r.is_log) begin
          if (m_v[k]) exp_spill.push_back(m_mem[k]);
          f = '0; f.tag = r.blk;
          for (int i = 0; i < BLK_BYTES; i++) f.byte_cnt[i] = r.mask[i] ? 1 : 0;
          m_mem[k].all_w = f;
          f.mark = r.mark_inc ? 1 : 0;
          m_mem[k].log_w = f;
          m_v[k] = 1;
        end
      end
      OP_EVICT: if (hit) begin exp_spill.push_back(m_mem[k]); m_v[k] = 0; end
      OP_INSTALL: begin
        if (hit) begin
          for (int i = 0; i < BLK_BYTES; i++) begin
            m_mem[k].all_w.byte_cnt[i] = CNT_W'(sat(m_mem[k].all_w.byte_cnt[i], r.entry.all_w.byte_cnt[i]));
            m_mem[k].log_w.byte_cnt[i] = CNT_W'(sat(m_mem[k].log_w.byte_cnt[i], r.entry.log_w.byte_cnt[i]));
          end
          m_mem[k].all_w.blk_cnt = CNT_W'(sat(m_mem[k].all_w.blk_cnt, r.entry.all_w.blk_cnt));
          m_mem[k].log_w.blk_cnt = CNT_W'(sat(m_mem[k].log_w.blk_cnt, r.entry.log_w.blk_cnt));
          m_mem[k].all_w.mark    = CNT_W'(sat(m_mem[k].all_w.mark, r.entry.all_w.mark));
          m_mem[k].log_w.mark    = CNT_W'(sat(m_mem[k].log_w.mark, r.entry.log_w.mark));
        end else begin
          if (m_v[k]) exp_spill.push_back(m_mem[k]);
          m_mem[k] = r.entry;
          m_v[k]   = 1;
        end
      end
      OP_CLWB: if (hit && m_mem[k].log_w.mark != 0) begin drop = 1; m_mem[k].log_w.mark--; end
      default: ;
    endcase
    return {hit, drop};
  endfunction

  // Spill checker.
  always @(posedge clk) if (rst_n && spill_valid && spill_ready) begin
    checks++;
    if (exp_spill.size() == 0) begin
      failures++; $display("FAIL unexpected spill tag %h", spill_entry.all_w.tag);
    end else begin
      entry_t e;
      e = exp_spill.pop_front();
      if (e !== spill_entry) begin
        failures++; $display("FAIL spill mismatch tag %h exp %h", spill_entry.all_w.tag, e.all_w.tag);
      end
    end
  end

  always @(negedge clk) spill_ready <= ($urandom_range(0, 3) != 0);

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cycle); end
  endtask

  task automatic check_stats(string what);
    check({what, " stats"}, stats.t_all == m_t_all && stats.s_all == m_t_all + m_b_all &&
                            stats.t_log == m_t_log && stats.s_log == m_t_log + m_b_log);
  endtask

  task automatic do_op(buf_req_t r);
    logic [1:0] e;
    longint t0;
    @(negedge clk);
    req = r; req_valid = 1;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    t0 = cycle;
    @(negedge clk); req_valid = 0;
    e = m_apply(r);
    @(posedge clk);
    while (!resp_valid) @(posedge clk);
    check("latency", cycle - t0 == 2);
    check("hit", resp.hit == e[1]);
    check("drop", resp.drop_clwb == e[0]);
    @(negedge clk);
    check_stats("op");
  endtask

  function automatic buf_req_t mk(buf_op_e op, blk_addr_t b, byte_mask_t m, bit lg, bit mi);
    buf_req_t r = '0;
    r.op = op; r.blk = b; r.mask = m; r.is_log = lg; r.mark_inc = mi;
    return r;
  endfunction

  function automatic entry_t rand_entry(blk_addr_t b);
    entry_t e;
    e.all_w.tag = b; e.log_w.tag = b;
    for (int i = 0; i < BLK_BYTES; i++) begin
      e.all_w.byte_cnt[i] = CNT_W'($urandom_range(0, 3));
      e.log_w.byte_cnt[i] = CNT_W'($urandom_range(0, 3));
    end
    e.all_w.blk_cnt = CNT_W'($urandom_range(0, 31)); e.log_w.blk_cnt = CNT_W'($urandom_range(0, 31));
    e.all_w.mark = CNT_W'($urandom_range(0, 2));     e.log_w.mark = CNT_W'($urandom_range(0, 2));
    return e;
  endfunction

  initial begin
    buf_req_t r;
    blk_addr_t pool [6];
    req = '0;
    foreach (m_v[i]) m_v[i] = 0;
    m_t_all = 0; m_b_all = 0; m_t_log = 0; m_b_log = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- Part 1: directed, with the numbers worked out by hand
    do_op(mk(OP_ACCESS, 57'h0c000, 128'hF, 1, 0));          // log update, bytes 0..3
    check("alloc no stats", stats.t_all == 0 && stats.s_all == 0 && stats.t_log == 0);
    do_op(mk(OP_ACCESS, 57'h0c000, 128'hFF, 0, 0));         // data update, bytes 0..7
    check("t_all=8 s_all=9", stats.t_all == 8 && stats.s_all == 9 && stats.t_log == 0 && stats.s_log == 0);
    do_op(mk(OP_ACCESS, 57'h0c000, 128'h3, 1, 0));          // log update, bytes 0..1
    check("t_all=10 s_all=12 t_log=4 s_log=5",
          stats.t_all == 10 && stats.s_all == 12 && stats.t_log == 4 && stats.s_log == 5);
    do_op(mk(OP_ACCESS, 57'h0c001, 128'hF, 0, 0));          // non-log miss: ignored
    check("non-log miss ignored", stats.s_all == 12);
    for (int i = 0; i < 40; i++) do_op(mk(OP_ACCESS, 57'h0c000, 128'h1, 0, 0));
    check("byte 0 saturates", stats.t_all == 10 + 28);        // 3 -> 31 adds 28
    check("block counter saturates", stats.s_all == 38 + 31); // 2 + 29
    // mark / clwb
    do_op(mk(OP_ACCESS, 57'h0c008, 128'h1, 1, 1));           // alloc in set 0: spills 0c000
    do_op(mk(OP_CLWB, 57'h0c008, '0, 0, 0));
    check("clwb dropped", resp.drop_clwb == 1);
    do_op(mk(OP_CLWB, 57'h0c008, '0, 0, 0));
    check("second clwb kept", resp.drop_clwb == 0);

    // ---- Part 2: random against the model
    foreach (pool[i]) pool[i] = 57'(i * 3 + 1);
    for (int n = 0; n < 3000; n++) begin
      int unsigned p = $urandom_range(0, 99);
      blk_addr_t b = pool[$urandom_range(0, 5)];
      byte_mask_t m;
      for (int w = 0; w < 4; w++) m[w*32 +: 32] = $urandom() & $urandom();
      if (p < 40)      r = mk(OP_ACCESS, b, m, 1, $urandom_range(0, 1));
      else if (p < 75) r = mk(OP_ACCESS, b, m, 0, 0);
      else if (p < 85) r = mk(OP_EVICT, b, '0, 0, 0);
      else if (p < 93) begin r = mk(OP_INSTALL, b, '0, 0, 0); r.entry = rand_entry(b); end
      else             r = mk(OP_CLWB, b, '0, 0, 0);
      do_op(r);
    end
    repeat (4) @(posedge clk);
    check("all spills seen", exp_spill.size() == 0);

    // ---- Part 3: clear
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    foreach (m_v[i]) m_v[i] = 0;
    exp_spill.delete();
    m_t_all = 0; m_b_all = 0; m_t_log = 0; m_b_log = 0;
    check_stats("clear");
    for (int i = 0; i < 6; i++) do_op(mk(OP_ACCESS, pool[i], 128'h1, 0, 0));
    check("empty after clear", stats.s_all == 0);

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

// agpm_buffer: locality-tracking buffer attached to one cache level (the
// L1-level buffer shared by the SMs, or the one shared by the L2 partitions).
//
// Each of the SETS sets holds one 128-byte block in two ways: the all way,
// counted by every request, and the log way, counted only by PM log updates.
// A way keeps one 5-bit saturating counter per byte, a block counter and a
// path-change mark. Rules, as the paper states them:
//   * a PM log update that misses allocates the block in both ways with the
//     counters of its bytes set to 1 (an entry is zeroed, then incremented);
//   * a request that misses and is not a log update is ignored;
//   * on a hit the block counter is incremented; each requested byte whose
//     counter is already non-zero is incremented as well; a log update
//     updates both ways, any other request only the all way.
// The statistics are t = sum of the byte counters above 1 and s = t + sum of
// the block counters, per way. Instead of summing the whole array when
// enquired, this design keeps the four sums as running registers: a byte
// counter going 1->2 adds 2, going n->n+1 (n>1) adds 1, each block-counter
// increment adds 1 to s. The sums cover the whole period, including blocks
// that were spilled meanwhile; `clear` (period end) zeroes them and
// invalidates every set, including the one an operation in flight has read.
//
// Eviction, installation and the mark (this design's reading of the text):
//   * OP_EVICT removes the entry and presents it on the spill port (to the
//     lower-level buffer or to the reservation buffer);
//   * OP_INSTALL writes an entry coming from above or from the reservation
//     buffer; if the set holds the same block the counters are added,
//     saturating; a different valid block is spilled first;
//   * an allocation that meets a different valid block also spills it;
//   * a log update whose path the selector changed from temporal to
//     non-temporal (mark_inc) increments the log-way mark; OP_CLWB on a
//     block whose mark is non-zero decrements it and answers drop_clwb.
//
// Timing: the set index is the low bits of the block address. The array is
// read in the cycle a request is accepted and written back in the next
// cycle, so req_ready is high at most every other cycle; resp_valid pulses
// in the write-back cycle. While a spill waits for spill_ready no request
// is accepted.
module agpm_buffer
  import agpm_pkg::*;
#(
  parameter int unsigned SETS = 512
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       req_valid,
  output logic       req_ready,
  input  buf_req_t   req,
  output logic       resp_valid,
  output buf_resp_t  resp,
  output logic       spill_valid,
  input  logic       spill_ready,
  output entry_t     spill_entry,
  output stats_t     stats
);

  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1;

  entry_t            mem [SETS];
  logic [SETS-1:0]   valid_q;

  logic              busy_q;
  buf_req_t          req_q;
  entry_t            rd_q;
  logic              rd_vld_q;

  logic              spill_valid_q;
  entry_t            spill_q;

  logic [STAT_W-1:0] sum_t_all_q, sum_b_all_q, sum_t_log_q, sum_b_log_q;

  function automatic logic [IDX_W-1:0] idx_of(blk_addr_t b);
    return b[IDX_W-1:0];
  endfunction

  // Hit update of one way: returns the new way and the increase of t.
  function automatic way_t bump(way_t w, byte_mask_t m, output logic [8:0] dt);
    way_t n;
    n  = w;
    dt = '0;
    for (int i = 0; i < BLK_BYTES; i++) begin
      if (m[i] && w.byte_cnt[i] != '0 && w.byte_cnt[i] != CNT_MAX) begin
        n.byte_cnt[i] = w.byte_cnt[i] + 1'b1;
        dt = dt + ((w.byte_cnt[i] == CNT_W'(1)) ? 9'd2 : 9'd1);
      end
    end
    if (w.blk_cnt != CNT_MAX) n.blk_cnt = w.blk_cnt + 1'b1;
    return n;
  endfunction

  function automatic logic [CNT_W-1:0] sat_add(logic [CNT_W-1:0] a, logic [CNT_W-1:0] b);
    logic [CNT_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[CNT_W] ? CNT_MAX : s[CNT_W-1:0];
  endfunction

  function automatic way_t merge(way_t a, way_t b);
    way_t n;
    n = a;
    for (int i = 0; i < BLK_BYTES; i++) n.byte_cnt[i] = sat_add(a.byte_cnt[i], b.byte_cnt[i]);
    n.blk_cnt = sat_add(a.blk_cnt, b.blk_cnt);
    n.mark    = sat_add(a.mark, b.mark);
    return n;
  endfunction

  // Execute-stage results.
  logic       hit;
  logic       do_write, new_valid, do_spill;
  entry_t     wr_entry;
  logic [8:0] dt_all, dt_log;
  logic       db_all, db_log;
  logic       drop;

  always_comb begin
    way_t       w_all, w_log, fresh;
    logic [8:0] d_a, d_l;
    hit       = rd_vld_q && (rd_q.all_w.tag == req_q.blk);
    do_write  = 1'b0;
    new_valid = rd_vld_q;
    do_spill  = 1'b0;
    wr_entry  = rd_q;
    dt_all    = '0;
    dt_log    = '0;
    db_all    = 1'b0;
    db_log    = 1'b0;
    drop      = 1'b0;
    w_all     = rd_q.all_w;
    w_log     = rd_q.log_w;
    d_a       = '0;
    d_l       = '0;
    fresh     = '0;
    fresh.tag = req_q.blk;
    for (int i = 0; i < BLK_BYTES; i++)
      fresh.byte_cnt[i] = req_q.mask[i] ? CNT_W'(1) : '0;
    unique case (req_q.op)
      OP_ACCESS: begin
        if (hit) begin
          w_all  = bump(rd_q.all_w, req_q.mask, d_a);
          dt_all = d_a;
          db_all = (rd_q.all_w.blk_cnt != CNT_MAX);
          if (req_q.is_log) begin
            w_log  = bump(rd_q.log_w, req_q.mask, d_l);
            dt_log = d_l;
            db_log = (rd_q.log_w.blk_cnt != CNT_MAX);
            if (req_q.mark_inc) w_log.mark = sat_add(w_log.mark, CNT_W'(1));
          end
          wr_entry.all_w = w_all;
          wr_entry.log_w = w_log;
          do_write = 1'b1;
        end else if (req_q.is_log) begin
          do_spill       = rd_vld_q;
          wr_entry.all_w = fresh;
          wr_entry.log_w = fresh;
          if (req_q.mark_inc) wr_entry.log_w.mark = CNT_W'(1);
          do_write  = 1'b1;
          new_valid = 1'b1;
        end
      end
      OP_EVICT: begin
        if (hit) begin
          do_spill  = 1'b1;
          new_valid = 1'b0;
        end
      end
      OP_INSTALL: begin
        do_write  = 1'b1;
        new_valid = 1'b1;
        if (hit) begin
          wr_entry.all_w = merge(rd_q.all_w, req_q.entry.all_w);
          wr_entry.log_w = merge(rd_q.log_w, req_q.entry.log_w);
        end else begin
          do_spill = rd_vld_q;
          wr_entry = req_q.entry;
        end
      end
      OP_CLWB: begin
        if (hit && rd_q.log_w.mark != '0) begin
          drop = 1'b1;
          wr_entry.log_w.mark = rd_q.log_w.mark - 1'b1;
          do_write = 1'b1;
        end
      end
      default: ;
    endcase
  end

  assign req_ready = !busy_q && !spill_valid_q;

  // Array: read on accept, write in the execute cycle.
  always_ff @(posedge clk) begin
    if (req_valid && req_ready) rd_q <= mem[idx_of(req.blk)];
    if (busy_q && do_write) mem[idx_of(req_q.blk)] <= wr_entry;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q       <= '0;
      busy_q        <= 1'b0;
      req_q         <= '0;
      rd_vld_q      <= 1'b0;
      spill_valid_q <= 1'b0;
      spill_q       <= '0;
      resp_valid    <= 1'b0;
      resp          <= '0;
      sum_t_all_q   <= '0;
      sum_b_all_q   <= '0;
      sum_t_log_q   <= '0;
      sum_b_log_q   <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (spill_valid_q && spill_ready) spill_valid_q <= 1'b0;
      if (req_valid && req_ready) begin
        busy_q   <= 1'b1;
        req_q    <= req;
        rd_vld_q <= valid_q[idx_of(req.blk)];
      end
      if (busy_q) begin
        busy_q                   <= 1'b0;
        valid_q[idx_of(req_q.blk)] <= new_valid;
        if (do_spill) begin
          spill_valid_q <= 1'b1;
          spill_q       <= rd_q;
        end
        resp_valid     <= 1'b1;
        resp.id        <= req_q.id;
        resp.hit       <= hit;
        resp.drop_clwb <= drop;
        sum_t_all_q    <= sum_t_all_q + STAT_W'(dt_all);
        sum_b_all_q    <= sum_b_all_q + STAT_W'(db_all);
        sum_t_log_q    <= sum_t_log_q + STAT_W'(dt_log);
        sum_b_log_q    <= sum_b_log_q + STAT_W'(db_log);
      end
      if (clear) begin
        valid_q       <= '0;
        rd_vld_q      <= 1'b0;  // an operation in flight sees the flushed set
        spill_valid_q <= 1'b0;
        sum_t_all_q   <= '0;
        sum_b_all_q   <= '0;
        sum_t_log_q   <= '0;
        sum_b_log_q   <= '0;
      end
    end
  end

  assign spill_valid = spill_valid_q;
  assign spill_entry = spill_q;

  assign stats.t_all = sum_t_all_q;
  assign stats.s_all = sum_t_all_q + sum_b_all_q;
  assign stats.t_log = sum_t_log_q;
  assign stats.s_log = sum_t_log_q + sum_b_log_q;

  // A spill is held until taken.
  property p_spill_hold;
    @(posedge clk) disable iff (!rst_n || clear)
      spill_valid && !spill_ready |=> spill_valid && $stable(spill_entry);
  endproperty
  a_spill_hold: assert property (p_spill_hold);

endmodule

// agpm_reservation_buffer_tb: writes entries, looks them up (a hit returns
// the entry one cycle later and removes it, a second lookup misses), checks
// that an overwrite of a slot by another block is counted and loses the old
// block, that a write in the lookup-response cycle wins over the removal,
// and that clear empties the table. A random phase compares against an
// associative-array model on a 16-slot table.
module agpm_reservation_buffer_tb;
  import agpm_pkg::*;

  localparam int unsigned RES_SETS = 16;

  logic clk = 0, rst_n = 0, clear = 0;
  logic wr_valid = 0, rd_valid = 0;
  entry_t wr_entry;
  blk_addr_t rd_blk;
  logic rd_resp_valid, rd_hit;
  entry_t rd_entry;
  logic [STAT_W-1:0] overwrites;
  int checks = 0, failures = 0;

  agpm_reservation_buffer #(.RES_SETS(RES_SETS)) dut (.*);

  always #5 clk = ~clk;

  entry_t m [int];   // slot -> entry
  int     m_over = 0;

  function automatic entry_t mk(blk_addr_t b, int seed);
    entry_t e = '0;
    e.all_w.tag = b; e.log_w.tag = b;
    for (int i = 0; i < BLK_BYTES; i++) e.all_w.byte_cnt[i] = CNT_W'((i + seed) % 32);
    e.log_w.blk_cnt = CNT_W'(seed);
    return e;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write(entry_t e);
    int k = int'(e.all_w.tag % RES_SETS);
    @(negedge clk); wr_valid = 1; wr_entry = e;
    @(negedge clk); wr_valid = 0;
    if (m.exists(k) && m[k].all_w.tag != e.all_w.tag) m_over++;
    m[k] = e;
  endtask

  task automatic lookup(blk_addr_t b);
    int k = int'(b % RES_SETS);
    bit exp_hit = m.exists(k) && m[k].all_w.tag == b;
    @(negedge clk); rd_valid = 1; rd_blk = b;
    @(negedge clk); rd_valid = 0;
    check("resp one cycle later", rd_resp_valid == 1);
    check($sformatf("hit %h", b), rd_hit == exp_hit);
    if (exp_hit) begin
      check("entry", rd_entry == m[k]);
      m.delete(k);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    write(mk(57'h100, 1));
    write(mk(57'h205, 2));
    lookup(57'h100);
    lookup(57'h100);              // taken: miss now
    lookup(57'h205);
    write(mk(57'h007, 3));
    write(mk(57'h017, 4));        // same slot, other block
    check("overwrite counted", overwrites == 1);
    m_over = 1;
    lookup(57'h007);              // lost
    lookup(57'h017);
    // write in the response cycle of a hit lookup on the same slot
    write(mk(57'h033, 5));
    @(negedge clk); rd_valid = 1; rd_blk = 57'h033;
    @(negedge clk); rd_valid = 0; wr_valid = 1; wr_entry = mk(57'h033, 6);
    check("hit", rd_hit == 1 && rd_entry == mk(57'h033, 5));
    @(negedge clk); wr_valid = 0;
    m[3] = mk(57'h033, 6);
    lookup(57'h033);
    // clear
    write(mk(57'h044, 7));
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    m.delete();
    lookup(57'h044);
    // random
    for (int n = 0; n < 2000; n++) begin
      blk_addr_t b = 57'($urandom_range(0, 47));
      if ($urandom_range(0, 1)) write(mk(b, n % 32)); else lookup(b);
    end
    check("overwrite count", overwrites == STAT_W'(m_over));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

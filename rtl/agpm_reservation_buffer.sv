// agpm_reservation_buffer: keeps AGPM buffer entries whose cache block was
// written back to memory, so that the locality record survives until the
// block is fetched again within the same period.
//
// The paper places this store in GPU memory next to the NVM and gives its
// function only (keep an entry on write-back, re-fill it when the block is
// fetched again, flush everything at period or kernel end). Its size and
// organisation are this design's choice: a direct-mapped table of RES_SETS
// entries indexed by the low block-address bits. A write to a slot that holds
// another block overwrites it; `overwrites` counts such losses.
//
// Interface and timing: a write (wr_valid) is always accepted and lands at
// the clock edge. A lookup (rd_valid, rd_blk) answers one cycle later on
// rd_resp_valid with rd_hit and the entry; a hit also removes the entry
// (it moves back to the AGPM buffer). A write in the same cycle as a lookup
// of the same slot wins over the removal. `clear` empties the table.
module agpm_reservation_buffer
  import agpm_pkg::*;
#(
  parameter int unsigned RES_SETS = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              wr_valid,
  input  entry_t            wr_entry,
  input  logic              rd_valid,
  input  blk_addr_t         rd_blk,
  output logic              rd_resp_valid,
  output logic              rd_hit,
  output entry_t            rd_entry,
  output logic [STAT_W-1:0] overwrites
);

  localparam int unsigned IDX_W = (RES_SETS > 1) ? $clog2(RES_SETS) : 1;

  entry_t              mem [RES_SETS];
  logic [RES_SETS-1:0] valid_q;
  blk_addr_t           rd_blk_q;
  logic                rd_vld_q;

  logic [IDX_W-1:0] wr_idx, rd_idx;
  assign wr_idx = wr_entry.all_w.tag[IDX_W-1:0];
  assign rd_idx = rd_blk[IDX_W-1:0];

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wr_idx] <= wr_entry;
    if (rd_valid) rd_entry <= mem[rd_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q       <= '0;
      rd_resp_valid <= 1'b0;
      rd_vld_q      <= 1'b0;
      rd_blk_q      <= '0;
      overwrites    <= '0;
    end else begin
      rd_resp_valid <= rd_valid;
      if (rd_valid) begin
        rd_blk_q <= rd_blk;
        rd_vld_q <= valid_q[rd_idx];
      end
      // Lookup hit: the entry leaves (decided on the registered compare).
      if (rd_resp_valid && rd_hit) valid_q[rd_blk_q[IDX_W-1:0]] <= 1'b0;
      if (wr_valid) begin
        valid_q[wr_idx] <= 1'b1;
        if (valid_q[wr_idx] && mem[wr_idx].all_w.tag != wr_entry.all_w.tag)
          overwrites <= overwrites + 1'b1;
      end
      if (clear) valid_q <= '0;
    end
  end

  assign rd_hit = rd_vld_q && (rd_entry.all_w.tag == rd_blk_q);

endmodule

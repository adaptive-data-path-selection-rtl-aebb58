// agpm_pkg: types and constants shared by the AGPM (adaptive GPU persistent
// memory data path selection) blocks.
//
// An AGPM buffer entry follows the layout of the locality buffer: per way a
// 57-bit tag (the 128-byte aligned block address of a 64-bit machine), 128
// byte counters and two extra counters (a block-reference counter and a
// path-change mark), all 5 bits wide. Each set holds an "all" way, updated
// by every memory request, and a "log" way, updated only by PM log updates.
// The widths are the ones of the overhead analysis; the 32-bit statistics,
// the request/response structs and the enum encodings are this design's own.
package agpm_pkg;

  localparam int unsigned ADDR_W    = 64;
  localparam int unsigned BLK_BYTES = 128;
  localparam int unsigned OFF_W     = $clog2(BLK_BYTES);   // 7
  localparam int unsigned TAG_W     = ADDR_W - OFF_W;      // 57
  localparam int unsigned CNT_W     = 5;
  localparam int unsigned STAT_W    = 32;
  localparam int unsigned SM_ID_W   = 5;                   // up to 32 SMs

  localparam logic [CNT_W-1:0] CNT_MAX = '1;

  typedef logic [TAG_W-1:0]     blk_addr_t;   // byte address >> 7
  typedef logic [BLK_BYTES-1:0] byte_mask_t;  // bytes of the block touched

  // One way of one set.
  typedef struct packed {
    blk_addr_t                         tag;
    logic [BLK_BYTES-1:0][CNT_W-1:0]   byte_cnt;
    logic [CNT_W-1:0]                  blk_cnt;
    logic [CNT_W-1:0]                  mark;
  } way_t;

  // One set: the all way and the log way share a block address.
  typedef struct packed {
    way_t all_w;
    way_t log_w;
  } entry_t;

  // Locality statistics of one buffer (Table III variables of one level).
  typedef struct packed {
    logic [STAT_W-1:0] t_all;
    logic [STAT_W-1:0] s_all;
    logic [STAT_W-1:0] t_log;
    logic [STAT_W-1:0] s_log;
  } stats_t;

  typedef enum logic {
    PATH_T  = 1'b0,   // temporal: store + clwb through L1/L2
    PATH_NT = 1'b1    // non-temporal: nt-store straight to the NVMC WPQ
  } path_e;

  typedef enum logic [3:0] {
    R_NONE = 4'd0,
    R_A    = 4'd1,
    R_B    = 4'd2,
    R_C    = 4'd3,
    R_D    = 4'd4,
    R_E    = 4'd5,
    R_F    = 4'd6,
    R_G    = 4'd7,
    R_H    = 4'd8
  } reason_e;

  // Operations of an AGPM buffer.
  typedef enum logic [1:0] {
    OP_ACCESS  = 2'd0,  // PM log update or hit notification of another request
    OP_EVICT   = 2'd1,  // the cache block leaves this level: spill the entry
    OP_INSTALL = 2'd2,  // take an entry from above or from the reservation buffer
    OP_CLWB    = 2'd3   // a clwb reaches the selector: drop it if marked
  } buf_op_e;

  typedef struct packed {
    buf_op_e             op;
    blk_addr_t           blk;
    byte_mask_t          mask;
    logic                is_log;    // request belongs to a PM log update
    logic                mark_inc;  // its path was changed temporal -> non-temporal
    logic [SM_ID_W-1:0]  id;
    entry_t              entry;     // OP_INSTALL only
  } buf_req_t;

  typedef struct packed {
    logic [SM_ID_W-1:0]  id;
    logic                hit;
    logic                drop_clwb;
  } buf_resp_t;

  // Requests of one SM after coalescing.
  typedef enum logic [1:0] {
    SM_LOG_STORE = 2'd0,  // undo-log update to PM
    SM_DATA      = 2'd1,  // other request that hit in the L1D cache
    SM_CLWB      = 2'd2   // clwb of a block
  } sm_kind_e;

  typedef struct packed {
    sm_kind_e    kind;
    path_e       instr_path;  // path the instruction encodes
    blk_addr_t   blk;
    byte_mask_t  mask;
  } sm_req_t;

  typedef struct packed {
    path_e   path;       // path the log update takes
    logic    add_clwb;   // non-temporal -> temporal: a clwb-like op follows the store
    logic    drop_clwb;  // this clwb is dropped (its log update went non-temporal)
    logic    hit;        // the L1-level AGPM buffer held the block
  } sm_resp_t;

endpackage

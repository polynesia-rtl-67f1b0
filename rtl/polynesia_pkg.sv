// polynesia_pkg: types and constants shared by the analytical-island hardware.
//
// An update-log entry carries the four fields the transactional engine records for
// every update: a commit ID (global order across threads), the update type
// (insert / delete / modify), the new data and a record key made of a column ID and
// a row ID. Field widths are this design's choice; the text names the fields only.
//
// Memory traffic from every unit goes through a simple request/response port of one
// 16-byte word (the upper end of the 8-16 B per-vault access granularity of an
// HMC-like memory). A request is accepted when req_valid and req_ready are both
// high; a read returns exactly one response, rsp_valid for one cycle, carrying the
// word address back so a unit with several reads in flight can match it. Writes
// return nothing. The word holds four 32-bit lanes; wmask selects the lanes written.
package polynesia_pkg;

  localparam int unsigned COMMIT_W = 32;  // commit ID (timestamp) width
  localparam int unsigned DATA_W   = 32;  // updated data / dictionary value width
  localparam int unsigned ROW_W    = 24;  // row ID width inside the record key
  localparam int unsigned COL_W    = 8;   // column ID width inside the record key
  localparam int unsigned KEY_W    = ROW_W + COL_W;

  localparam int unsigned MEM_AW    = 32;  // word address width
  localparam int unsigned MEM_DW    = 128; // 16-byte memory word
  localparam int unsigned MEM_LANES = MEM_DW / 32;

  typedef enum logic [1:0] {
    UPD_INSERT = 2'd0,
    UPD_DELETE = 2'd1,
    UPD_MODIFY = 2'd2
  } upd_type_e;

  typedef struct packed {
    logic [COL_W-1:0] col;
    logic [ROW_W-1:0] row;
  } rec_key_t;

  typedef struct packed {
    logic [COMMIT_W-1:0] commit_id;
    upd_type_e           utype;
    rec_key_t            key;
    logic [DATA_W-1:0]   data;
  } log_entry_t;

  // An update after the hash lookup: the entry plus the base address of the
  // column buffer it belongs to, found in the (column,row) hash index.
  typedef struct packed {
    log_entry_t        entry;
    logic              found;
    logic [MEM_AW-1:0] col_buf;
  } shipped_upd_t;

  typedef struct packed {
    logic                 we;
    logic [MEM_LANES-1:0] wmask;
    logic [MEM_AW-1:0]    addr;
    logic [MEM_DW-1:0]    wdata;
  } mem_req_t;

  typedef struct packed {
    logic [MEM_AW-1:0] addr;
    logic [MEM_DW-1:0] rdata;
  } mem_rsp_t;

  // Hash-index node layout in memory (one word per node):
  //   lane 0: record key, lane 1: column buffer address, lane 2: next node
  //   address (0 ends the list). A bucket word holds the first node address in lane 0.
  function automatic logic [MEM_DW-1:0] make_node(logic [KEY_W-1:0] key,
                                                  logic [MEM_AW-1:0] val,
                                                  logic [MEM_AW-1:0] next);
    return {32'd0, next, val, key};
  endfunction

  // Copy-unit command: copy len words from src to dst.
  typedef struct packed {
    logic [MEM_AW-1:0] src;
    logic [MEM_AW-1:0] dst;
    logic [MEM_AW-1:0] len;
  } copy_cmd_t;

  // Memory ports of one vault's analytical island, in order.
  localparam int unsigned NUM_PROBE  = 4;  // hash-unit probe units (Sec. 5.1)
  localparam int unsigned NUM_FETCH  = 4;  // copy-unit fetch units (Fig. 5)
  localparam int unsigned NUM_WB     = 4;  // copy-unit writeback units (Fig. 5)
  localparam int unsigned PORT_PROBE = 0;
  localparam int unsigned PORT_SHIP  = PORT_PROBE + NUM_PROBE;
  localparam int unsigned PORT_FETCH = PORT_SHIP + 1;
  localparam int unsigned PORT_WB    = PORT_FETCH + NUM_FETCH;
  localparam int unsigned PORT_UAPP  = PORT_WB + NUM_WB;
  localparam int unsigned VAULT_PORTS = PORT_UAPP + 1;


  // Event counters of one vault, brought out for observation.
  typedef struct packed {
    logic [31:0] shipped;          // updates written to column buffers
    logic [31:0] dropped;          // updates whose key was not in the index
    logic [31:0] merge_stalls;     // cycles the merge waited for a log head
    logic [31:0] rob_overlap;      // cycles with >= 2 hash lookups in flight
    logic [15:0] sort_cycles;      // cycles of the last sort
    logic [31:0] inserts;          // rows appended by update application
    logic [31:0] deletes_ignored;  // delete updates not applied
    logic [31:0] applies;          // completed update applications
    logic [31:0] copy_words;       // words copied by the copy unit
    logic [7:0]  copy_max_inflight;
    logic [31:0] snaps_created;
    logic [31:0] snaps_shared;
    logic [31:0] snaps_freed;
  } vault_stats_t;

  // Request to the consistency metadata (from the PIM cores or the vault itself).
  typedef enum logic [1:0] {
    SNAP_QUERY_BEGIN = 2'd0,
    SNAP_QUERY_END   = 2'd1,
    SNAP_COL_UPDATE  = 2'd2
  } snap_op_e;

endpackage

// polynesia_vault: the analytical-island hardware in the logic layer of one vault of
// the 3D-stacked memory - update shipping unit, update application unit, copy unit
// and the consistency (snapshot) metadata.
//
// Data flow:
//   transactional logs -> update shipping unit -> per-column buffers in this vault's
//   memory -> (apply command) buffer reader -> update application unit -> new column
//   and dictionary -> column-update notice to the snapshot manager, which marks the
//   column dirty -> the next query on the column gets a fresh snapshot made by the
//   copy unit.
// The PIM cores that run the analytical engine, the vault's DRAM controller and the
// transactional CPUs are outside this module; their connections are ports: the 8
// per-thread log streams, the apply command, the dictionary load/read ports, the
// query begin/end port and the memory ports.
//
// Memory ports (index, in the order fixed by polynesia_pkg): 0-3 probe units,
// 4 column-buffer writer, 5-8 copy fetch units, 9-12 copy writeback units,
// 13 update application (shared by the buffer reader, which only runs while the
// update application unit is idle). Each port: request valid/ready, one response
// per read.
//
// Own choices: the buffer reader, its sharing of port 13, the apply command, and
// giving the vault's own column-update notices priority over PIM-core requests at
// the snapshot manager. The update application unit holds the dictionary of one
// column at a time; the dictionary of the column to update is loaded through
// dict_wr_* before the apply command.
module polynesia_vault
  import polynesia_pkg::*;
#(
  parameter int unsigned NUM_QUEUES  = 8,
  parameter int unsigned QUEUE_DEPTH = 128,
  parameter int unsigned FINAL_DEPTH = 1024,
  parameter int unsigned ROB_DEPTH   = 8,
  parameter int unsigned NUM_BUCKETS = 1024,
  parameter int unsigned MAX_UPD     = 1024,
  parameter int unsigned MAX_DICT    = 2048,
  parameter int unsigned TB_DEPTH    = 16,
  parameter int unsigned NUM_SNAP    = 16,
  parameter int unsigned SNAP_WORDS  = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [MEM_AW-1:0] table_base,
  input  logic [MEM_AW-1:0] snap_base,
  // update shipping
  input  logic [31:0]       pending_updates,
  output logic              batch_trigger,
  input  logic              batch_clear,
  input  logic              log_valid [NUM_QUEUES],
  output logic              log_ready [NUM_QUEUES],
  input  log_entry_t        log_entry [NUM_QUEUES],
  input  logic              log_done  [NUM_QUEUES],
  output logic              batch_done,
  // update application command
  input  logic              apply_valid,
  output logic              apply_ready,
  input  logic [COL_W-1:0]  apply_col,
  input  logic [MEM_AW-1:0] apply_buf,      // column buffer of the column
  input  logic [MEM_AW-1:0] apply_new_ptr,  // where the new column goes
  output logic              apply_done,
  // dictionary / column set-up and read-back
  input  logic              dict_wr_en,
  input  logic [$clog2(MAX_DICT)-1:0] dict_wr_idx,
  input  logic [DATA_W-1:0] dict_wr_val,
  input  logic [$clog2(MAX_DICT):0]   dict_wr_size,
  input  logic              col_init,
  input  logic [MEM_AW-1:0] col_init_ptr,
  input  logic [ROW_W:0]    col_init_rows,
  input  logic [$clog2(MAX_DICT)-1:0] dict_rd_idx,
  output logic [DATA_W-1:0] dict_rd_val,
  output logic [$clog2(MAX_DICT):0]   dict_size,
  output logic [MEM_AW-1:0] col_ptr,
  output logic [ROW_W:0]    col_rows,
  output logic [5:0]        col_code_bits,
  // analytical queries (PIM cores)
  input  logic              q_valid,
  output logic              q_ready,
  input  snap_op_e          q_op,
  input  logic [COL_W-1:0]  q_col,
  input  logic [$clog2(NUM_SNAP)-1:0] q_snap,
  input  logic [MEM_AW-1:0] q_ptr,
  input  logic [ROW_W:0]    q_rows,
  output logic              q_rsp_valid,
  output logic [$clog2(NUM_SNAP)-1:0] q_rsp_snap,
  output logic [MEM_AW-1:0] q_rsp_ptr,
  output logic              q_rsp_new,
  output logic [(1<<COL_W)-1:0] col_dirty,
  // memory ports
  output logic              mem_req_valid [VAULT_PORTS],
  input  logic              mem_req_ready [VAULT_PORTS],
  output mem_req_t          mem_req       [VAULT_PORTS],
  input  logic              mem_rsp_valid [VAULT_PORTS],
  input  mem_rsp_t          mem_rsp       [VAULT_PORTS],
  output vault_stats_t      stats
);
  // ---------------- update shipping ----------------
  logic [COL_W-1:0] cnt_col;
  logic [15:0]      cnt_val;

  update_shipping_unit #(
    .NUM_QUEUES(NUM_QUEUES), .QUEUE_DEPTH(QUEUE_DEPTH), .FINAL_DEPTH(FINAL_DEPTH),
    .N_PROBE(NUM_PROBE), .ROB_DEPTH(ROB_DEPTH), .NUM_BUCKETS(NUM_BUCKETS)
  ) u_ship (
    .clk, .rst_n, .table_base, .pending_updates, .batch_trigger, .batch_clear,
    .log_valid, .log_ready, .log_entry, .log_done, .batch_done,
    .cnt_col, .cnt_val,
    .mem_req_valid(mem_req_valid[PORT_PROBE:PORT_SHIP]),
    .mem_req_ready(mem_req_ready[PORT_PROBE:PORT_SHIP]),
    .mem_req      (mem_req[PORT_PROBE:PORT_SHIP]),
    .mem_rsp_valid(mem_rsp_valid[PORT_PROBE:PORT_SHIP]),
    .mem_rsp      (mem_rsp[PORT_PROBE:PORT_SHIP]),
    .stat_shipped(stats.shipped), .stat_dropped(stats.dropped),
    .stat_merge_stall(stats.merge_stalls), .stat_rob_overlap(stats.rob_overlap)
  );

  // ---------------- buffer reader + update application ----------------
  typedef enum logic [2:0] {A_IDLE, A_RD, A_WAIT, A_PUSH, A_START, A_RUN, A_NOTIFY} astate_e;
  astate_e astate;
  logic [COL_W-1:0]  a_col;
  logic [MEM_AW-1:0] a_buf, a_new;
  logic [15:0]       a_cnt, a_idx;
  logic [MEM_DW-1:0] a_word;

  assign cnt_col     = apply_col;
  assign apply_ready = (astate == A_IDLE);

  logic      ua_upd_valid, ua_upd_ready, ua_start, ua_busy, ua_done;
  logic      ua_mem_req_valid, ua_mem_req_ready, ua_mem_rsp_valid;
  mem_req_t  ua_mem_req;
  upd_type_e a_type;

  assign a_type       = upd_type_e'(a_word[105:104]);
  assign ua_upd_valid = (astate == A_PUSH);
  assign ua_start     = (astate == A_START);

  update_application_unit #(.MAX_UPD(MAX_UPD), .MAX_DICT(MAX_DICT)) u_app (
    .clk, .rst_n,
    .dict_wr_en, .dict_wr_idx, .dict_wr_val, .dict_wr_size,
    .col_init_ptr, .col_init_rows, .col_init,
    .dict_rd_idx, .dict_rd_val, .dict_size, .col_ptr, .col_rows, .col_code_bits,
    .upd_valid(ua_upd_valid), .upd_ready(ua_upd_ready), .upd_type(a_type),
    .upd_row  (a_word[ROW_W-1:0]), .upd_val(a_word[32 +: DATA_W]),
    .start    (ua_start), .new_col_ptr(a_new), .busy(ua_busy), .done(ua_done),
    .mem_req_valid(ua_mem_req_valid), .mem_req_ready(ua_mem_req_ready), .mem_req(ua_mem_req),
    .mem_rsp_valid(ua_mem_rsp_valid), .mem_rsp(mem_rsp[PORT_UAPP]),
    .stat_sort_cycles(stats.sort_cycles), .stat_deletes_ignored(stats.deletes_ignored),
    .stat_inserts(stats.inserts)
  );

  // port 13: buffer reader while loading, update application unit otherwise
  wire reader_owns = (astate == A_RD) || (astate == A_WAIT);
  always_comb begin
    if (reader_owns) begin
      mem_req_valid[PORT_UAPP] = (astate == A_RD);
      mem_req[PORT_UAPP]       = '0;
      mem_req[PORT_UAPP].addr  = a_buf + MEM_AW'(a_idx);
    end else begin
      mem_req_valid[PORT_UAPP] = ua_mem_req_valid;
      mem_req[PORT_UAPP]       = ua_mem_req;
    end
  end
  assign ua_mem_req_ready = !reader_owns && mem_req_ready[PORT_UAPP];
  assign ua_mem_rsp_valid = !reader_owns && mem_rsp_valid[PORT_UAPP];

  // snapshot-manager request mux: own column-update notice first
  logic             sm_req_valid, sm_req_ready;
  logic [1:0]       sm_req_op;
  logic [COL_W-1:0] sm_req_col;
  logic [MEM_AW-1:0] sm_req_ptr;
  logic [ROW_W:0]   sm_req_rows;
  wire              notify = (astate == A_NOTIFY);

  assign sm_req_valid = notify || q_valid;
  assign sm_req_op    = notify ? 2'(SNAP_COL_UPDATE) : 2'(q_op);
  assign sm_req_col   = notify ? a_col    : q_col;
  assign sm_req_ptr   = notify ? col_ptr  : q_ptr;
  assign sm_req_rows  = notify ? col_rows : q_rows;
  assign q_ready      = !notify && sm_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      astate         <= A_IDLE;
      a_col          <= '0;
      a_buf          <= '0;
      a_new          <= '0;
      a_cnt          <= '0;
      a_idx          <= '0;
      a_word         <= '0;
      apply_done     <= 1'b0;
      stats.applies  <= '0;
    end else begin
      apply_done <= 1'b0;
      unique case (astate)
        A_IDLE: if (apply_valid) begin
          a_col  <= apply_col;
          a_buf  <= apply_buf;
          a_new  <= apply_new_ptr;
          a_cnt  <= cnt_val;
          a_idx  <= '0;
          astate <= (cnt_val == '0) ? A_START : A_RD;
        end
        A_RD:   if (mem_req_ready[PORT_UAPP]) astate <= A_WAIT;
        A_WAIT: if (mem_rsp_valid[PORT_UAPP]) begin
          a_word <= mem_rsp[PORT_UAPP].rdata;
          astate <= A_PUSH;
        end
        A_PUSH: if (ua_upd_ready) begin
          a_idx  <= a_idx + 1'b1;
          astate <= (a_idx + 1'b1 == a_cnt) ? A_START : A_RD;
        end
        A_START: astate <= A_RUN;
        A_RUN:   if (ua_done) astate <= A_NOTIFY;
        A_NOTIFY: if (sm_req_ready) begin
          apply_done    <= 1'b1;
          stats.applies <= stats.applies + 1;
          astate        <= A_IDLE;
        end
        default: astate <= A_IDLE;
      endcase
    end
  end

  // ---------------- consistency: snapshot manager + copy unit ----------------
  logic      cp_valid, cp_ready, cp_busy, cp_done;
  copy_cmd_t cp_cmd;

  snapshot_manager #(.NUM_SNAP(NUM_SNAP), .SNAP_WORDS(SNAP_WORDS)) u_snap (
    .clk, .rst_n, .snap_base,
    .req_valid(sm_req_valid), .req_ready(sm_req_ready), .req_op(sm_req_op),
    .req_col  (sm_req_col), .req_snap(q_snap), .req_ptr(sm_req_ptr), .req_rows(sm_req_rows),
    .rsp_valid(q_rsp_valid), .rsp_snap(q_rsp_snap), .rsp_ptr(q_rsp_ptr), .rsp_new(q_rsp_new),
    .copy_valid(cp_valid), .copy_ready(cp_ready), .copy_cmd(cp_cmd), .copy_done(cp_done),
    .col_dirty,
    .stat_created(stats.snaps_created), .stat_shared(stats.snaps_shared),
    .stat_freed(stats.snaps_freed)
  );

  copy_unit #(.TB_DEPTH(TB_DEPTH)) u_copy (
    .clk, .rst_n,
    .cmd_valid(cp_valid), .cmd_ready(cp_ready), .cmd(cp_cmd), .busy(cp_busy), .done(cp_done),
    .rd_req_valid(mem_req_valid[PORT_FETCH +: NUM_FETCH]),
    .rd_req_ready(mem_req_ready[PORT_FETCH +: NUM_FETCH]),
    .rd_req      (mem_req[PORT_FETCH +: NUM_FETCH]),
    .rd_rsp_valid(mem_rsp_valid[PORT_FETCH +: NUM_FETCH]),
    .rd_rsp      (mem_rsp[PORT_FETCH +: NUM_FETCH]),
    .wr_req_valid(mem_req_valid[PORT_WB +: NUM_WB]),
    .wr_req_ready(mem_req_ready[PORT_WB +: NUM_WB]),
    .wr_req      (mem_req[PORT_WB +: NUM_WB]),
    .stat_words  (stats.copy_words), .stat_max_inflight(stats.copy_max_inflight)
  );

  a_reader_not_during_apply: assert property (@(posedge clk) disable iff (!rst_n)
    reader_owns |-> !ua_busy);
endmodule
